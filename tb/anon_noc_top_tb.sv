// anon_noc_top_tb: end-to-end test of the mesh at reduced size (4x4, short
// tunnel timeout). Every IP sends packets of 1-5 flits to random other tiles
// with random gaps; every IP output applies random back-pressure. Each flit's
// data carries (source, sequence number, flit index), so the receiving side
// can check against a scoreboard of what was sent: every packet arrives once,
// at its destination, whole, with its flits in order and unchanged, and no
// chaff or dummy flit ever reaches an IP. The run has three phases: chaffing
// and random delay both on, chaffing only, then both off; after the traffic
// stops the network must drain completely.
//
// Each mechanism of the design is counted and must happen at least once:
// tunnel creation and renewal, TC install, VCI swap, tunnel exit at an
// endpoint, chaff flit inserted and winnowed, dummy packet sent and
// discarded, endpoint random delay, IP stalled by back-pressure. A DT packet
// that finds no table entry counts as a failure.
module anon_noc_top_tb;
  import noc_pkg::*;
  localparam int unsigned MX = 4, MY = 4, N = MX * MY;
  localparam int unsigned PKTS_PER_PHASE = 12;

  logic clk = 1'b0, rst_n = 1'b0;
  logic chaff_en = 1'b1, delay_en = 1'b1;
  logic        ip_in_valid  [N];
  logic        ip_in_ready  [N];
  ip_flit_t    ip_in        [N];
  logic        ip_out_valid [N];
  logic        ip_out_ready [N];
  ip_flit_t    ip_out       [N];
  logic        tun_valid    [N];
  coord_t      tun_ep       [N];
  logic        ev_tunnel_new[N];
  logic        ev_chaff_flit[N];
  logic        ev_dummy_pkt [N];
  rtr_events_t rtr_ev       [N];

  anon_noc_top #(.MESH_X(MX), .MESH_Y(MY), .TIMEOUT(600), .LIFETIME(1500)) dut (.*);

`include "anon_noc_tb_body.svh"

  initial begin
    int total;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    total = 0;
    for (int ph = 0; ph < 3; ph++) begin
      chaff_en = (ph < 2);
      delay_en = (ph == 0);
      run_traffic(PKTS_PER_PHASE, 240);
      total += PKTS_PER_PHASE * N;
    end
    drain_and_report(total);
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog: sent=%0d received=%0d", n_sent, n_recv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
