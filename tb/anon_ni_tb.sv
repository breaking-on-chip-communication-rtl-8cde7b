// anon_ni_tb: one NI at (3,3) of an 8x8 mesh. The test stands in for the
// network: it decodes every flit the NI sends. TC flits set the tunnel the
// test expects (first VCI, key); each DT packet must use the current tunnel,
// decrypt to the right destination, and, once its chaff flit (if any) is
// taken out, carry exactly the next packet the IP sent. Also checked:
// nothing leaves before the first tunnel; dummy packets are 4 or 5 flits and
// only start after an idle gap longer than T_C; the chaff rate is near
// P_C (randNo <= P_C, so 51 %) with chaff on and zero with chaff off; the
// chaff flit never sits at head or tail; tunnels are renewed; flits from the
// router reach the IP unchanged.
module anon_ni_tb;
  import noc_pkg::*;
  localparam int unsigned T_C = 16, TIMEOUT = 300, P_C = 50;
  localparam coord_t ME = '{y: 4'd3, x: 4'd3};

  logic clk = 1'b0, rst_n = 1'b0, chaff_en = 1'b1;
  logic ip_in_valid = 1'b0, ip_in_ready;
  ip_flit_t ip_in;
  logic ip_out_valid, ip_out_ready = 1'b1;
  ip_flit_t ip_out;
  logic net_out_valid, net_out_ready;
  flit_t net_out;
  logic net_in_valid = 1'b0, net_in_ready;
  flit_t net_in;
  logic tun_valid;
  coord_t tun_ep;
  logic ev_tunnel_new, ev_chaff_flit, ev_dummy_pkt;
  int checks = 0, failures = 0, cyc = 0;

  anon_ni #(.X(4'd3), .Y(4'd3), .TIMEOUT(TIMEOUT), .T_C(T_C), .P_C(P_C)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) net_out_ready <= ($urandom_range(0, 4) != 0);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  // ---------------- IP packet source ----------------
  typedef struct {
    coord_t dest;
    logic [DATA_W-1:0] d [$];
  } pkt_t;
  pkt_t sent [$];
  int n_pkts = 0;

  task automatic send_ip(int len, coord_t dest);
    pkt_t p;
    p.dest = dest;
    for (int i = 0; i < len; i++) begin
      logic [DATA_W-1:0] w;
      w = {$urandom, $urandom, $urandom, $urandom};
      p.d.push_back(w);
      ip_in.head = (i == 0);
      ip_in.tail = (i == len - 1);
      ip_in.dest = dest;
      ip_in.data = w;
      ip_in_valid = 1'b1;
      @(posedge clk);
      while (!ip_in_ready) @(posedge clk);
      #1;
    end
    ip_in_valid = 1'b0;
    sent.push_back(p);
    n_pkts++;
  endtask

  // ---------------- network-side decoder ----------------
  logic [VCI_W-1:0] cur_vci;
  logic [KEY_W-1:0] cur_key;
  bit   have_tun = 1'b0;
  int   n_tc = 0, n_dt = 0, n_chaff = 0, n_dummy = 0, n_legit = 0;
  int   last_out_cyc = 0;
  // packet being received
  flit_t rx [$];
  int    rx_gap;

  task automatic finish_packet();
    enc_hdr_t h;
    h = enc_hdr_t'(sym_crypt(cur_key, rx[0].ehdr));
    check(rx[0].vci == cur_vci, "DT uses current tunnel VCI");
    check(rx[0].dest == '0, "plain destination hidden");
    check(h.tag == ni_hash(ME), "chaff id carries hash(NI_ID)");
    if (h.kind == CH_DUMMY) begin
      n_dummy++;
      check(rx.size() == 4 || rx.size() == 5, $sformatf("dummy of %0d flits", rx.size()));
      check(rx_gap > T_C, $sformatf("dummy after idle gap %0d > T_C", rx_gap));
    end else begin
      pkt_t p;
      int k;
      n_legit++;
      if (h.kind == CH_FLIT) begin
        n_chaff++;
        check(h.pos >= 1 && int'(h.pos) <= rx.size() - 2, "chaff strictly inside packet");
        rx.delete(int'(h.pos));
      end else begin
        check(h.kind == CH_NONE, "chaff kind valid");
      end
      check(sent.size() > 0, "packet was sent by the IP");
      if (sent.size() > 0) begin
        p = sent.pop_front();
        check(h.dest == p.dest, "destination decrypts correctly");
        check(rx.size() == p.d.size(), $sformatf("length %0d vs %0d", rx.size(), p.d.size()));
        k = 0;
        foreach (rx[i]) if (i < p.d.size() && rx[i].data != p.d[i]) k++;
        check(k == 0, "payload in order");
      end
    end
    rx.delete();
  endtask

  always @(posedge clk) begin
    if (rst_n && net_out_valid && net_out_ready) begin
      if (net_out.ptype == PT_TC) begin
        check(rx.size() == 0, "TC only between packets");
        cur_vci  = net_out.data[VCI_W +: VCI_W];    // layer 0 vin
        cur_key  = net_out.ehdr;
        have_tun = 1'b1;
        n_tc++;
      end else begin
        check(net_out.ptype == PT_DT, "only DT packets in data phase");
        check(have_tun, "no data before the first tunnel");
        if (is_head(net_out.ftype)) begin
          check(rx.size() == 0, "head starts a packet");
          rx_gap = cyc - last_out_cyc - 1;
          n_dt++;
        end
        rx.push_back(net_out);
        if (is_tail(net_out.ftype)) finish_packet();
      end
      last_out_cyc = cyc;
    end
  end

  initial begin
    int chaff_on_pkts, chaff_on_chaffs;
    ip_in = '0;
    net_in = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    // ---- phase 1: chaffing on, mixed traffic with long and short gaps ----
    for (int n = 0; n < 300; n++) begin
      coord_t d;
      d.x = 4'($urandom_range(0, 7)); d.y = 4'($urandom_range(0, 7));
      send_ip($urandom_range(2, 5), d);
      repeat ($urandom_range(0, 50)) @(posedge clk);
      #1;
    end
    repeat (200) @(posedge clk);
    chaff_on_pkts = n_legit; chaff_on_chaffs = n_chaff;
    check(chaff_on_pkts == 300, $sformatf("all %0d packets delivered", chaff_on_pkts));
    check(chaff_on_chaffs > 300 * 35 / 100 && chaff_on_chaffs < 300 * 67 / 100,
          $sformatf("chaff rate %0d / 300 near 51 %%", chaff_on_chaffs));
    check(n_dummy > 10, $sformatf("dummy packets sent (%0d)", n_dummy));
    check(n_tc >= 3, $sformatf("tunnel renewed (%0d TCs)", n_tc));
    // ---- phase 2: chaffing off ----
    chaff_en = 1'b0;
    @(posedge clk);
    begin
      int d0, c0;
      d0 = n_dummy; c0 = n_chaff;
      for (int n = 0; n < 100; n++) begin
        coord_t d;
        d.x = 4'($urandom_range(0, 7)); d.y = 4'($urandom_range(0, 7));
        send_ip($urandom_range(1, 5), d);
        repeat ($urandom_range(0, 50)) @(posedge clk);
        #1;
      end
      repeat (100) @(posedge clk);
      check(n_dummy == d0 && n_chaff == c0, "no chaff with chaffing off");
      check(n_legit == 400, "all packets delivered with chaffing off");
    end
    // ---- phase 3: ejection path ----
    for (int i = 0; i < 3; i++) begin
      net_in = '0;
      net_in.ftype = (i == 0) ? FT_HEAD : (i == 2) ? FT_TAIL : FT_BODY;
      net_in.ptype = PT_NORMAL;
      net_in.dest  = ME;
      net_in.data  = DATA_W'(i + 77);
      net_in_valid = 1'b1;
      #1;
      check(ip_out_valid && ip_out.data == DATA_W'(i + 77) && ip_out.head == (i == 0) &&
            ip_out.tail == (i == 2), "ejected flit reaches IP");
      @(posedge clk); #1;
    end
    net_in_valid = 1'b0;
    $display("tc=%0d dt=%0d legit=%0d chaff=%0d dummy=%0d", n_tc, n_dt, n_legit, n_chaff, n_dummy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
