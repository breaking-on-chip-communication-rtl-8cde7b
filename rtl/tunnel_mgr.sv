// tunnel_mgr: outbound-tunnel manager of one source tile.
//
// What it does. Each source keeps one outbound tunnel: a route from its own
// router S to a tunnel endpoint E picked at random among the routers H_MIN to
// H_MAX hops away. The tunnel lives TIMEOUT cycles; then a new endpoint is
// picked and a new tunnel built, while the old one stays in use until the new
// one is confirmed, so tunnel creation runs in the background of data
// transfer. Tunnels belong to the source only and are independent of any
// communication session.
//
// How it works. PICK draws a random router each cycle until one lies H_MIN to
// H_MAX hops (Manhattan distance, the XY path length) away. GEN draws one
// random VCI per router of the XY path S, R2, ..., E (hops+1 values, one per
// cycle) and then the key K_S-E. SEND offers one Tunnel Confirmation flit:
// layer j (bits j*LAYER_W up) tells router j of the path its index VCI v_j
// and outgoing VCI v_j+1; the last layer marks the endpoint, whose key rides
// in the ehdr field. When the NI takes the flit, v_0 and K_S-E become the
// current tunnel (tun_valid, tun_vci, tun_key) and the timeout starts.
//
// From the paper: h_min = 3, a timeout per tunnel, a random endpoint h_min
// to h_max hops away, tunnel shape given by XY routing, per-hop random VCIs,
// a TC packet that each hop peels, the table of S indexed by "source" (v_0
// here). This design's own simplification: the paper builds the tunnel with a
// three-way handshake (broadcast Tunnel Initialization, Tunnel Acceptance in
// which every router draws its own VCI and key, then Tunnel Confirmation),
// protected by public-key cryptography it does not specify. Here the source
// draws all VCIs itself and sends only the confirmation step, unencrypted.
// H_MAX = 4 and TIMEOUT = 2048 are own choices (the paper gives none); at
// most MAX_LAYERS = H_MAX+1 layers fit in one flit.
//
// Interface: `rnd` is the tile's shared random number (new every cycle).
// tc_valid/tc_ready/tc_flit is a valid/ready source. `renew` pulses when a
// new tunnel becomes current.
module tunnel_mgr
  import noc_pkg::*;
#(
  parameter logic [COORD_W-1:0] X = '0,
  parameter logic [COORD_W-1:0] Y = '0,
  parameter int unsigned MESH_X  = 8,
  parameter int unsigned MESH_Y  = 8,
  parameter int unsigned H_MIN   = 3,
  parameter int unsigned H_MAX   = 4,
  parameter int unsigned TIMEOUT = 2048
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [31:0]      rnd,
  // current tunnel
  output logic             tun_valid,
  output logic [VCI_W-1:0] tun_vci,
  output logic [KEY_W-1:0] tun_key,
  output coord_t           tun_ep,
  output logic             renew,
  // TC packet to the network
  output logic             tc_valid,
  input  logic             tc_ready,
  output flit_t            tc_flit
);

  localparam coord_t ME = '{y: Y, x: X};
  localparam int unsigned TW = $clog2(TIMEOUT + 1);

  if (H_MAX + 1 > MAX_LAYERS || H_MIN > H_MAX || H_MIN == 0) begin : g_bad
    $error("tunnel_mgr: need 1 <= H_MIN <= H_MAX <= MAX_LAYERS-1");
  end

  typedef enum logic [1:0] {ST_PICK, ST_GEN, ST_SEND, ST_ACTIVE} state_e;

  state_e           state;
  coord_t           nep;                 // endpoint being built
  logic [2:0]       nhops;
  logic [2:0]       gidx;
  logic [VCI_W-1:0] vcis [MAX_LAYERS];
  logic [KEY_W-1:0] nkey;
  logic [TW-1:0]    timer;

  // candidate endpoint drawn this cycle
  coord_t      cand;
  int unsigned cand_d;
  always_comb begin
    cand.x = COORD_W'(32'(rnd[27:24]) % MESH_X);
    cand.y = COORD_W'(32'(rnd[31:28]) % MESH_Y);
    cand_d = hops(ME, cand);
  end

  // TC flit
  always_comb begin
    tc_flit       = '0;
    tc_flit.ftype = FT_HEADTAIL;
    tc_flit.ptype = PT_TC;
    tc_flit.dest  = nep;
    tc_flit.ehdr  = nkey;
    for (int j = 0; j < MAX_LAYERS; j++) begin
      tc_layer_t l;
      l.vin  = vcis[j];
      l.vout = (j + 1 < MAX_LAYERS) ? vcis[(j + 1) % MAX_LAYERS] : '0;
      l.endp = (3'(j) == nhops);
      if (3'(j) == nhops) l.vout = '0;
      if (3'(j) <= nhops) tc_flit.data[j*LAYER_W +: LAYER_W] = l;
    end
  end

  assign tc_valid = (state == ST_SEND);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= ST_PICK;
      nep       <= '0;
      nhops     <= '0;
      gidx      <= '0;
      nkey      <= '0;
      timer     <= '0;
      tun_valid <= 1'b0;
      tun_vci   <= '0;
      tun_key   <= '0;
      tun_ep    <= '0;
      renew     <= 1'b0;
      for (int j = 0; j < MAX_LAYERS; j++) vcis[j] <= '0;
    end else begin
      renew <= 1'b0;
      unique case (state)
        ST_PICK: begin
          if (cand_d >= H_MIN && cand_d <= H_MAX) begin
            nep   <= cand;
            nhops <= 3'(cand_d);
            gidx  <= '0;
            state <= ST_GEN;
          end
        end
        ST_GEN: begin
          if (gidx <= nhops) begin
            vcis[gidx] <= rnd[VCI_W-1:0];
            gidx       <= gidx + 3'd1;
          end else begin
            nkey  <= rnd ^ {rnd[15:0], rnd[31:16]} ^ 32'h5A5A_C3C3;
            state <= ST_SEND;
          end
        end
        ST_SEND: begin
          if (tc_ready) begin
            tun_valid <= 1'b1;
            tun_vci   <= vcis[0];
            tun_key   <= nkey;
            tun_ep    <= nep;
            renew     <= 1'b1;
            timer     <= TW'(TIMEOUT);
            state     <= ST_ACTIVE;
          end
        end
        ST_ACTIVE: begin
          if (timer <= TW'(1)) state <= ST_PICK;
          timer <= timer - TW'(1);
        end
        default: state <= ST_PICK;
      endcase
    end
  end

endmodule
