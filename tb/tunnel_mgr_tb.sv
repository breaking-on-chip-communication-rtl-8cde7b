// tunnel_mgr_tb: runs two tunnel managers (corner tile (0,0) and tile (5,2)
// of an 8x8 mesh) through several tunnel lifetimes. For every Tunnel
// Confirmation flit it checks the endpoint distance (H_MIN..H_MAX hops), the
// layer chain (outgoing VCI of layer j = index VCI of layer j+1, endpoint mark
// on the last layer only, nothing above it), that the accepted tunnel becomes
// current, that the old tunnel stays valid while the new one is built, and
// the TIMEOUT period between renewals.
module tunnel_mgr_tb;
  import noc_pkg::*;
  localparam int unsigned TIMEOUT = 64, H_MIN = 3, H_MAX = 4, NT = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [31:0] rnd;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  always @(posedge clk) rnd <= $urandom;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // two instances
  logic             tv [2];
  logic [VCI_W-1:0] tvci [2];
  logic [KEY_W-1:0] tkey [2];
  coord_t           tep [2];
  logic             renew [2];
  logic             tcv [2];
  logic             tcr [2];
  flit_t            tcf [2];

  tunnel_mgr #(.X(4'd0), .Y(4'd0), .TIMEOUT(TIMEOUT), .H_MIN(H_MIN), .H_MAX(H_MAX)) u0 (
    .clk, .rst_n, .rnd, .tun_valid(tv[0]), .tun_vci(tvci[0]), .tun_key(tkey[0]),
    .tun_ep(tep[0]), .renew(renew[0]), .tc_valid(tcv[0]), .tc_ready(tcr[0]), .tc_flit(tcf[0]));
  tunnel_mgr #(.X(4'd5), .Y(4'd2), .TIMEOUT(TIMEOUT), .H_MIN(H_MIN), .H_MAX(H_MAX)) u1 (
    .clk, .rst_n, .rnd, .tun_valid(tv[1]), .tun_vci(tvci[1]), .tun_key(tkey[1]),
    .tun_ep(tep[1]), .renew(renew[1]), .tc_valid(tcv[1]), .tc_ready(tcr[1]), .tc_flit(tcf[1]));

  function automatic int manh(coord_t a, int x, int y);
    int dx, dy;
    dx = int'(a.x) - x; if (dx < 0) dx = -dx;
    dy = int'(a.y) - y; if (dy < 0) dy = -dy;
    return dx + dy;
  endfunction

  task automatic run(int u, int mx, int my);
    int hp, hold_n, cyc;
    logic [VCI_W-1:0] old_vci, v0;
    logic [KEY_W-1:0] k;
    coord_t ep;
    tc_layer_t l [MAX_LAYERS];
    old_vci = '0;
    for (int t = 0; t < NT; t++) begin
      cyc = 0;
      // wait for TC
      while (!tcv[u]) begin
        @(posedge clk); #1; cyc++;
        if (t > 0) check(tv[u] && tvci[u] == old_vci, "old tunnel stays current while building");
      end
      if (t > 0) begin
        check(cyc >= TIMEOUT - 1, $sformatf("renewal after timeout (%0d cycles)", cyc));
        check(cyc <= TIMEOUT + 64, $sformatf("renewal not too late (%0d cycles)", cyc));
      end
      // check TC flit
      check(tcf[u].ptype == PT_TC && tcf[u].ftype == FT_HEADTAIL, "TC flit type");
      hp = manh(tcf[u].dest, mx, my);
      check(hp >= H_MIN && hp <= H_MAX, $sformatf("endpoint %0d hops away", hp));
      check(tcf[u].dest.x < 8 && tcf[u].dest.y < 8, "endpoint inside the mesh");
      for (int j = 0; j < MAX_LAYERS; j++) l[j] = tc_layer_t'(tcf[u].data[j*LAYER_W +: LAYER_W]);
      for (int j = 0; j < hp; j++) begin
        check(!l[j].endp, "no endpoint mark before last layer");
        check(l[j].vout == l[j+1].vin, "layer chain");
      end
      check(l[hp].endp, "endpoint mark on last layer");
      check((tcf[u].data >> ((hp + 1) * LAYER_W)) == '0, "nothing above the last layer");
      // hold the TC back a few cycles: the old tunnel must stay current
      hold_n = $urandom_range(0, 5);
      repeat (hold_n) begin
        @(posedge clk); #1;
        check(tcv[u], "TC stays offered until taken");
        if (t > 0) check(tvci[u] == old_vci, "old VCI while TC waits");
      end
      begin
        v0 = l[0].vin; k = tcf[u].ehdr; ep = tcf[u].dest;
        tcr[u] = 1'b1;
        @(posedge clk); #1;
        tcr[u] = 1'b0;
        check(renew[u], "renew pulse");
        check(tv[u] && tvci[u] == v0 && tkey[u] == k && tep[u] == ep, "tunnel becomes current");
        check(!tcv[u], "TC withdrawn after accept");
        old_vci = v0;
      end
    end
  endtask

  initial begin
    tcr[0] = 1'b0; tcr[1] = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    check(!tv[0] && !tv[1], "no tunnel after reset");
    fork
      run(0, 0, 0);
      run(1, 5, 2);
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
