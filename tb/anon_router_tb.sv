// anon_router_tb: one router at (2,2) of a mesh, driven on all five inputs.
// Checks, against expectations built in the test:
//   - XY routing of plain packets to every output, flits unchanged, and
//     wormhole order (no interleaving) under random back-pressure;
//   - TC handling: layer install, layer shift, forwarding toward the
//     endpoint; consumption of the endpoint layer;
//   - DT switching: VCI swapped to the outgoing VCI at an intermediate hop;
//   - endpoint exit: destination decrypted, packet becomes plain, dummy
//     packets discarded whole, the chaff flit at its position discarded;
//   - DT packets without a table entry dropped;
//   - one-cycle hop latency with delay off, and DELAY_MIN..DELAY_MAX extra
//     cycles per flit with delay on (P_D = 100 here so every packet is
//     selected).
module anon_router_tb;
  import noc_pkg::*;
  localparam coord_t ME = '{y: 4'd2, x: 4'd2};

  logic clk = 1'b0, rst_n = 1'b0, delay_en = 1'b0;
  logic  in_valid [NPORTS];
  logic  in_ready [NPORTS];
  flit_t in_flit  [NPORTS];
  logic  out_valid [NPORTS];
  logic  out_ready [NPORTS];
  flit_t out_flit  [NPORTS];
  rtr_events_t ev;
  logic [$clog2(17)-1:0] n_tunnels;
  int checks = 0, failures = 0;
  int cyc = 0;
  bit rand_ready = 1'b0;

  anon_router #(.X(4'd2), .Y(4'd2), .P_D(100), .LIFETIME(100000)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  // ---------------- drivers ----------------
  flit_t inq [NPORTS][$];
  int    in_t [NPORTS][$];   // cycle each flit was accepted
  for (genvar p = 0; p < NPORTS; p++) begin : g_drv
    always @(posedge clk) begin
      if (in_valid[p] && in_ready[p]) begin
        void'(inq[p].pop_front());
        in_t[p].push_back(cyc);
      end
    end
    always_comb begin
      in_valid[p] = (inq[p].size() > 0) && rst_n;
      in_flit[p]  = (inq[p].size() > 0) ? inq[p][0] : '0;
    end
  end

  // ---------------- monitors ----------------
  flit_t outq [NPORTS][$];
  int    out_t [NPORTS][$];
  int    ev_cnt [7];
  for (genvar p = 0; p < NPORTS; p++) begin : g_mon
    always @(posedge clk) begin
      out_ready[p] <= rand_ready ? ($urandom_range(0, 3) != 0) : 1'b1;
      if (out_valid[p] && out_ready[p]) begin
        outq[p].push_back(out_flit[p]);
        out_t[p].push_back(cyc);
      end
    end
  end
  always @(posedge clk) begin
    if (ev.tc_install)  ev_cnt[0]++;
    if (ev.vci_swap)    ev_cnt[1]++;
    if (ev.ep_exit)     ev_cnt[2]++;
    if (ev.chaff_drop)  ev_cnt[3]++;
    if (ev.dummy_drop)  ev_cnt[4]++;
    if (ev.delay_start) ev_cnt[5]++;
    if (ev.vci_miss)    ev_cnt[6]++;
  end

  function automatic flit_t mk(flit_type_e ft, pkt_type_e pt, int vci, coord_t d,
                               logic [KEY_W-1:0] eh, int id, int idx);
    flit_t f;
    f = '0;
    f.ftype = ft; f.ptype = pt; f.vci = VCI_W'(vci); f.dest = d; f.ehdr = eh;
    f.data = {96'h0, 8'(idx), 8'hA5, 16'(id)};
    return f;
  endfunction

  // a packet of n flits
  task automatic push_pkt(int p, int n, pkt_type_e pt, int vci, coord_t d,
                          logic [KEY_W-1:0] eh, int id);
    for (int i = 0; i < n; i++) begin
      flit_type_e ft;
      ft = (n == 1) ? FT_HEADTAIL : (i == 0) ? FT_HEAD : (i == n - 1) ? FT_TAIL : FT_BODY;
      inq[p].push_back(mk(ft, pt, vci, d, (i == 0) ? eh : '0, id, i));
    end
  endtask

  task automatic settle(int n);
    repeat (n) @(posedge clk);
  endtask

  task automatic clear_out();
    for (int p = 0; p < NPORTS; p++) begin
      outq[p].delete(); out_t[p].delete(); in_t[p].delete();
    end
  endtask

  function automatic coord_t C(int x, int y);
    coord_t c;
    c.x = COORD_W'(x); c.y = COORD_W'(y);
    return c;
  endfunction

  // checks that output p carries exactly packets ids[] (each n flits), in
  // whole packets, flit indices in order
  task automatic expect_pkts(int p, int ids[$], int n);
    int k;
    k = 0;
    check(outq[p].size() == ids.size() * n,
          $sformatf("port %0d flit count %0d, expected %0d", p, outq[p].size(), ids.size() * n));
    if (outq[p].size() != ids.size() * n) return;
    foreach (ids[j]) begin
      for (int i = 0; i < n; i++) begin
        flit_t f;
        f = outq[p][k++];
        check(f.data[15:0] == 16'(ids[j]) && f.data[31:24] == 8'(i),
              $sformatf("port %0d packet %0d flit %0d in order", p, ids[j], i));
        check(is_head(f.ftype) == (i == 0) && is_tail(f.ftype) == (i == n - 1),
              $sformatf("port %0d flit type", p));
      end
    end
  endtask

  localparam logic [KEY_W-1:0] KEY = 32'h1357_9BDF;

  function automatic logic [KEY_W-1:0] ehdr(chaff_e k, int pos, coord_t d);
    enc_hdr_t h;
    h.tag = 16'hBEEF; h.kind = k; h.pos = 6'(pos); h.dest = d;
    return sym_crypt(KEY, KEY_W'(h));
  endfunction

  function automatic logic [DATA_W-1:0] layers(tc_layer_t l0, tc_layer_t l1, tc_layer_t l2);
    logic [DATA_W-1:0] d;
    d = '0;
    d[0 +: LAYER_W] = l0;
    d[LAYER_W +: LAYER_W] = l1;
    d[2*LAYER_W +: LAYER_W] = l2;
    return d;
  endfunction

  initial begin
    int ids_a[$], ids_b[$];
    flit_t f;
    tc_layer_t l0, l1, l2;
    for (int p = 0; p < NPORTS; p++) out_ready[p] = 1'b1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    settle(2);

    // ---- 1. XY routing of plain packets, with back-pressure ----
    rand_ready = 1'b1;
    push_pkt(P_WEST,  3, PT_NORMAL, 0, C(5, 0), '0, 1);  // east
    push_pkt(P_WEST,  3, PT_NORMAL, 0, C(2, 0), '0, 2);  // north
    push_pkt(P_EAST,  3, PT_NORMAL, 0, C(0, 7), '0, 3);  // west
    push_pkt(P_NORTH, 3, PT_NORMAL, 0, C(2, 6), '0, 4);  // south
    push_pkt(P_SOUTH, 3, PT_NORMAL, 0, C(2, 2), '0, 5);  // local
    push_pkt(P_LOCAL, 3, PT_NORMAL, 0, C(6, 3), '0, 6);  // east
    push_pkt(P_SOUTH, 3, PT_NORMAL, 0, C(7, 1), '0, 7);  // east
    settle(60);
    ids_a = '{1, 6, 7}; // order on east depends on arbitration: check as a set below
    check(outq[P_EAST].size() == 9, "east gets three packets");
    begin
      int seen [int];
      for (int k = 0; k < outq[P_EAST].size(); k += 3) begin
        int id;
        id = int'(outq[P_EAST][k].data[15:0]);
        seen[id] = 1;
        for (int i = 0; i < 3; i++)
          check(outq[P_EAST][k+i].data[15:0] == 16'(id) && outq[P_EAST][k+i].data[31:24] == 8'(i),
                "east wormhole: packet flits contiguous and ordered");
      end
      check(seen.exists(1) && seen.exists(6) && seen.exists(7), "east carries packets 1, 6, 7");
    end
    ids_b = '{2}; expect_pkts(P_NORTH, ids_b, 3);
    ids_b = '{3}; expect_pkts(P_WEST, ids_b, 3);
    ids_b = '{4}; expect_pkts(P_SOUTH, ids_b, 3);
    ids_b = '{5}; expect_pkts(P_LOCAL, ids_b, 3);
    check(outq[P_NORTH][0] == mk(FT_HEAD, PT_NORMAL, 0, C(2, 0), '0, 2, 0), "plain flit unchanged");
    rand_ready = 1'b0;
    settle(2);
    clear_out();

    // ---- 2. TC at an intermediate hop: install, shift, forward east ----
    l0 = '{endp: 1'b0, vin: 12'h010, vout: 12'h020};
    l1 = '{endp: 1'b0, vin: 12'h020, vout: 12'h030};
    l2 = '{endp: 1'b1, vin: 12'h030, vout: 12'h000};
    f = mk(FT_HEADTAIL, PT_TC, 0, C(4, 2), KEY, 0, 0);
    f.data = layers(l0, l1, l2);
    inq[P_WEST].push_back(f);
    settle(5);
    check(outq[P_EAST].size() == 1, "TC forwarded east");
    if (outq[P_EAST].size() == 1) begin
      check(outq[P_EAST][0].data == (f.data >> LAYER_W), "TC layer removed");
      check(outq[P_EAST][0].ehdr == KEY && outq[P_EAST][0].dest == C(4, 2), "TC key and endpoint kept");
    end
    check(n_tunnels == 1, "one entry installed");
    clear_out();

    // ---- 3. DT through the intermediate hop: VCI swap ----
    push_pkt(P_WEST, 4, PT_DT, 12'h010, C(0, 0), 32'h0BAD_F00D, 20);
    settle(10);
    ids_b = '{20}; expect_pkts(P_EAST, ids_b, 4);
    if (outq[P_EAST].size() == 4) begin
      check(outq[P_EAST][0].vci == 12'h020, "VCI swapped to outgoing VCI");
      check(outq[P_EAST][0].ptype == PT_DT && outq[P_EAST][0].ehdr == 32'h0BAD_F00D,
            "DT stays encrypted inside tunnel");
    end
    clear_out();

    // ---- 4. TC endpoint layer consumed ----
    f = mk(FT_HEADTAIL, PT_TC, 0, ME, KEY, 0, 0);
    f.data = layers('{endp: 1'b1, vin: 12'h033, vout: 12'h000}, '0, '0);
    inq[P_NORTH].push_back(f);
    settle(5);
    for (int p = 0; p < NPORTS; p++) check(outq[p].size() == 0, "endpoint TC consumed");
    check(n_tunnels == 2, "endpoint entry installed");

    // ---- 5. endpoint exit: decrypt destination, plain XY on ----
    push_pkt(P_NORTH, 3, PT_DT, 12'h033, C(0, 0), ehdr(CH_NONE, 0, C(2, 0)), 30);
    settle(10);
    ids_b = '{30}; expect_pkts(P_NORTH, ids_b, 3);
    if (outq[P_NORTH].size() == 3) begin
      check(outq[P_NORTH][0].ptype == PT_NORMAL && outq[P_NORTH][0].dest == C(2, 0),
            "endpoint restores plain destination");
      check(outq[P_NORTH][0].vci == '0 && outq[P_NORTH][0].ehdr == '0, "tunnel fields cleared");
    end
    clear_out();

    // ---- 6. dummy packet discarded whole ----
    push_pkt(P_NORTH, 5, PT_DT, 12'h033, C(0, 0), ehdr(CH_DUMMY, 0, C(1, 1)), 31);
    settle(10);
    for (int p = 0; p < NPORTS; p++) check(outq[p].size() == 0, "dummy packet discarded");

    // ---- 7. chaff flit at position 2 of a 4-flit packet discarded ----
    push_pkt(P_NORTH, 4, PT_DT, 12'h033, C(0, 0), ehdr(CH_FLIT, 2, C(5, 2)), 32);
    settle(10);
    check(outq[P_EAST].size() == 3, "chaffed packet leaves with one flit less");
    if (outq[P_EAST].size() == 3) begin
      check(outq[P_EAST][0].data[31:24] == 8'd0 && outq[P_EAST][1].data[31:24] == 8'd1 &&
            outq[P_EAST][2].data[31:24] == 8'd3, "flit at position 2 winnowed");
      check(is_head(outq[P_EAST][0].ftype) && outq[P_EAST][1].ftype == FT_BODY &&
            outq[P_EAST][2].ftype == FT_TAIL, "remaining flit types");
    end
    clear_out();

    // ---- 8. DT with no entry dropped ----
    push_pkt(P_SOUTH, 3, PT_DT, 12'h099, C(0, 0), '0, 33);
    settle(10);
    for (int p = 0; p < NPORTS; p++) check(outq[p].size() == 0, "unknown VCI dropped");

    // ---- 9. hop latency with delay off ----
    push_pkt(P_NORTH, 3, PT_DT, 12'h033, C(0, 0), ehdr(CH_NONE, 0, C(2, 5)), 34);
    settle(10);
    check(outq[P_SOUTH].size() == 3, "latency packet delivered");
    for (int i = 0; i < 3 && i < out_t[P_SOUTH].size(); i++)
      check(out_t[P_SOUTH][i] - in_t[P_NORTH][i] == 1, "one cycle per hop without delay");
    clear_out();

    // ---- 10. random delay at the endpoint ----
    delay_en = 1'b1;
    push_pkt(P_NORTH, 4, PT_DT, 12'h033, C(0, 0), ehdr(CH_NONE, 0, C(2, 5)), 35);
    settle(40);
    check(outq[P_SOUTH].size() == 4, "delayed packet delivered");
    for (int i = 0; i < 4 && i < out_t[P_SOUTH].size(); i++) begin
      int ready_at, extra;
      ready_at = in_t[P_NORTH][i] + 1;
      if (i > 0 && out_t[P_SOUTH][i-1] + 1 > ready_at) ready_at = out_t[P_SOUTH][i-1] + 1;
      extra = out_t[P_SOUTH][i] - ready_at;
      check(extra >= 1 && extra <= 5, $sformatf("flit %0d delayed %0d cycles (1..5)", i, extra));
    end
    delay_en = 1'b0;
    clear_out();

    check(ev_cnt[0] == 2 && ev_cnt[1] == 1 && ev_cnt[3] == 1 && ev_cnt[4] == 1 &&
          ev_cnt[6] == 1 && ev_cnt[5] == 4, "event counts");
    $display("events: install=%0d swap=%0d exit=%0d chaff=%0d dummy=%0d delay=%0d miss=%0d",
             ev_cnt[0], ev_cnt[1], ev_cnt[2], ev_cnt[3], ev_cnt[4], ev_cnt[5], ev_cnt[6]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
