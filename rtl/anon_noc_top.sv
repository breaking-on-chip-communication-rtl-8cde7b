// anon_noc_top: MESH_X x MESH_Y mesh NoC with anonymous outbound-tunnel
// routing and traffic obfuscation.
//
// What it does. Every tile has a router (anon_router) and a network interface
// (anon_ni); the IP cores are outside this module and attach through the
// ip_* ports of their tile. Each source sends its packets through its own
// short outbound tunnel to a random endpoint router 3 to H_MAX hops away,
// switched by VCIs so that no router inside the tunnel sees source and
// destination together. At the endpoint the true destination is decrypted and
// the packet continues with plain XY routing. Chaff flits and dummy packets
// added at the source NI (chaff_en) are removed at the endpoint, and the
// endpoint may add 1-5 cycles of random delay per flit (delay_en), so the
// outbound flit timing seen at the source link no longer matches the inbound
// timing at the destination link. Tunnels are renewed every TIMEOUT cycles
// with a new endpoint.
//
// Structure. Node n = y*MESH_X + x sits at column x, row y; row 0 is the
// north edge. Router ports N, E, S, W connect to the neighbours; ports on the
// mesh edge are tied off (never used by XY routing). Every link is a
// valid/ready channel of one flit per cycle.
//
// From the paper: 8x8 mesh, XY routing, P_C = P_D = 50 %, h_min = 3, delay
// 1-5 cycles, chaffing and random delay usable together or alone. Own
// choices: all other sizes (see the submodules). LIFETIME of a router's table
// entry must exceed TIMEOUT plus the time to drain a tunnel.
//
// Limitation. There is one virtual channel per link. A packet goes XY to its
// tunnel endpoint and then XY again to its destination, so the whole route
// can contain turns that plain XY routing forbids. Under load the mesh can
// therefore block in a cycle of wormhole dependencies. Blocked DT packets are
// dropped once their table entries expire. Separate channels for the tunnel
// leg and the plain leg would remove this.
module anon_noc_top
  import noc_pkg::*;
#(
  parameter int unsigned MESH_X     = 8,
  parameter int unsigned MESH_Y     = 8,
  parameter int unsigned H_MIN      = 3,
  parameter int unsigned H_MAX      = 4,
  parameter int unsigned TIMEOUT    = 2048,
  parameter int unsigned LIFETIME   = 3072,
  parameter int unsigned ENTRIES    = 16,
  parameter int unsigned FIFO_DEPTH = 4,
  parameter int unsigned P_C        = 50,
  parameter int unsigned P_D        = 50,
  parameter int unsigned T_C        = 16,
  parameter int unsigned DELAY_MIN  = 1,
  parameter int unsigned DELAY_MAX  = 5,
  parameter int unsigned MAX_PKT    = 5,
  localparam int unsigned N         = MESH_X * MESH_Y
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        chaff_en,
  input  logic        delay_en,
  // IP cores
  input  logic        ip_in_valid  [N],
  output logic        ip_in_ready  [N],
  input  ip_flit_t    ip_in        [N],
  output logic        ip_out_valid [N],
  input  logic        ip_out_ready [N],
  output ip_flit_t    ip_out       [N],
  // status and events
  output logic        tun_valid    [N],
  output coord_t      tun_ep       [N],
  output logic        ev_tunnel_new[N],
  output logic        ev_chaff_flit[N],
  output logic        ev_dummy_pkt [N],
  output rtr_events_t rtr_ev       [N]
);

  // router outputs, per node and port
  logic  r_out_valid [N][NPORTS];
  flit_t r_out_flit  [N][NPORTS];
  logic  r_in_ready  [N][NPORTS];

  for (genvar y = 0; y < MESH_Y; y++) begin : g_y
    for (genvar x = 0; x < MESH_X; x++) begin : g_x
      localparam int unsigned n = y * MESH_X + x;

      logic  in_valid  [NPORTS];
      flit_t in_flit   [NPORTS];
      logic  out_ready [NPORTS];
      logic  ni_out_valid, ni_in_ready;
      flit_t ni_out;
      logic [$clog2(ENTRIES+1)-1:0] n_tun;

      // neighbour links: input p of this router is fed by the neighbour's
      // output on the opposite side
      if (y > 0) begin : g_n
        assign in_valid[P_NORTH]  = r_out_valid[n-MESH_X][P_SOUTH];
        assign in_flit[P_NORTH]   = r_out_flit [n-MESH_X][P_SOUTH];
        assign out_ready[P_NORTH] = r_in_ready [n-MESH_X][P_SOUTH];
      end else begin : g_n0
        assign in_valid[P_NORTH]  = 1'b0;
        assign in_flit[P_NORTH]   = '0;
        assign out_ready[P_NORTH] = 1'b0;
      end
      if (y < MESH_Y - 1) begin : g_s
        assign in_valid[P_SOUTH]  = r_out_valid[n+MESH_X][P_NORTH];
        assign in_flit[P_SOUTH]   = r_out_flit [n+MESH_X][P_NORTH];
        assign out_ready[P_SOUTH] = r_in_ready [n+MESH_X][P_NORTH];
      end else begin : g_s0
        assign in_valid[P_SOUTH]  = 1'b0;
        assign in_flit[P_SOUTH]   = '0;
        assign out_ready[P_SOUTH] = 1'b0;
      end
      if (x > 0) begin : g_w
        assign in_valid[P_WEST]  = r_out_valid[n-1][P_EAST];
        assign in_flit[P_WEST]   = r_out_flit [n-1][P_EAST];
        assign out_ready[P_WEST] = r_in_ready [n-1][P_EAST];
      end else begin : g_w0
        assign in_valid[P_WEST]  = 1'b0;
        assign in_flit[P_WEST]   = '0;
        assign out_ready[P_WEST] = 1'b0;
      end
      if (x < MESH_X - 1) begin : g_e
        assign in_valid[P_EAST]  = r_out_valid[n+1][P_WEST];
        assign in_flit[P_EAST]   = r_out_flit [n+1][P_WEST];
        assign out_ready[P_EAST] = r_in_ready [n+1][P_WEST];
      end else begin : g_e0
        assign in_valid[P_EAST]  = 1'b0;
        assign in_flit[P_EAST]   = '0;
        assign out_ready[P_EAST] = 1'b0;
      end
      assign in_valid[P_LOCAL]  = ni_out_valid;
      assign in_flit[P_LOCAL]   = ni_out;
      assign out_ready[P_LOCAL] = ni_in_ready;

      anon_router #(
        .X(COORD_W'(x)), .Y(COORD_W'(y)), .FIFO_DEPTH(FIFO_DEPTH),
        .ENTRIES(ENTRIES), .LIFETIME(LIFETIME), .P_D(P_D),
        .DELAY_MIN(DELAY_MIN), .DELAY_MAX(DELAY_MAX),
        .SEED(32'hACE1_0001 + 32'(n) * 32'h0001_0003)
      ) u_rtr (
        .clk, .rst_n, .delay_en,
        .in_valid, .in_ready(r_in_ready[n]), .in_flit,
        .out_valid(r_out_valid[n]), .out_ready, .out_flit(r_out_flit[n]),
        .ev(rtr_ev[n]), .n_tunnels(n_tun)
      );

      anon_ni #(
        .X(COORD_W'(x)), .Y(COORD_W'(y)), .MESH_X(MESH_X), .MESH_Y(MESH_Y),
        .H_MIN(H_MIN), .H_MAX(H_MAX), .TIMEOUT(TIMEOUT), .P_C(P_C),
        .T_C(T_C), .MAX_PKT(MAX_PKT),
        .SEED(32'h1234_5679 + 32'(n) * 32'h0003_0007)
      ) u_ni (
        .clk, .rst_n, .chaff_en,
        .ip_in_valid(ip_in_valid[n]), .ip_in_ready(ip_in_ready[n]), .ip_in(ip_in[n]),
        .ip_out_valid(ip_out_valid[n]), .ip_out_ready(ip_out_ready[n]), .ip_out(ip_out[n]),
        .net_out_valid(ni_out_valid), .net_out_ready(r_in_ready[n][P_LOCAL]), .net_out(ni_out),
        .net_in_valid(r_out_valid[n][P_LOCAL]), .net_in_ready(ni_in_ready),
        .net_in(r_out_flit[n][P_LOCAL]),
        .tun_valid(tun_valid[n]), .tun_ep(tun_ep[n]),
        .ev_tunnel_new(ev_tunnel_new[n]), .ev_chaff_flit(ev_chaff_flit[n]),
        .ev_dummy_pkt(ev_dummy_pkt[n])
      );
    end
  end

endmodule
