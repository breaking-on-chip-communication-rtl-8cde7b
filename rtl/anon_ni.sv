// anon_ni: network interface of one tile, with outbound tunnelling and
// chaffing.
//
// What it does. Packets from the IP core are sent into the network only
// through the tile's current outbound tunnel, as Data Transfer (DT) packets:
// the head flit carries the tunnel's first VCI and, encrypted under the
// source-endpoint key K_S-E, the true destination and the chaff identifier.
// The plain destination field stays empty, so no router inside the tunnel
// learns source and destination together. Chaffing adds dummy traffic that
// only the tunnel endpoint can tell apart (AddChaff, run every cycle):
//   first scenario   when the outbound link has been idle more than T_C
//                    cycles and this gap has not been checked yet (cflag),
//                    draw randNo in 0..99; if randNo <= P_C, send a dummy
//                    packet of 4 or 5 flits (chaff kind CH_DUMMY).
//   second scenario  when a packet has been received from the IP, draw
//                    randNo; if randNo <= P_C and the packet has at least two
//                    flits, insert one chaff flit at a random position
//                    strictly between its head and tail (chaff kind CH_FLIT,
//                    the position encrypted with it).
//   cflag is set by either check and cleared when a packet is sent.
// Flits that arrive from the router (already plain packets, their chaff
// removed at the endpoint) are handed to the IP unchanged in order.
//
// How it works. A packet buffer of MAX_PKT flits takes a whole IP packet
// (FILL), then the packet is sent flit by flit with the chaff flit spliced in
// (SEND); dummy packets are sent from DUMMY. A tunnel_mgr keeps the tunnel; its
// Tunnel Confirmation flit goes out between packets, ahead of anything else.
// The NI sends nothing before the first tunnel exists (the IP is stalled).
// One lfsr_rng serves the tunnel manager and the chaffing decisions, as the
// paper reuses the NI's random number generator.
//
// From the paper: Algorithm "Add Chaff at source NI" (rand(0,99) <= P_C,
// dummy of rand(4,5) flits, chaff at a random position, cflag), P_C = 50 %,
// DT packet format {DT, VCI, En_K(D), payload}. Own choices: T_C = 16 cycles,
// chaff never at head or tail position, one-packet buffer, MAX_PKT = 5 flits
// (a 64-byte line in 16-byte flits plus a head), the field layout, and the
// placeholder cipher and hash from noc_pkg.
//
// Interface: valid/ready on all four streams (IP in, IP out, network out to
// the router's local input, network in from its local output). ev_* pulse
// one cycle per event.
module anon_ni
  import noc_pkg::*;
#(
  parameter logic [COORD_W-1:0] X = '0,
  parameter logic [COORD_W-1:0] Y = '0,
  parameter int unsigned MESH_X  = 8,
  parameter int unsigned MESH_Y  = 8,
  parameter int unsigned H_MIN   = 3,
  parameter int unsigned H_MAX   = 4,
  parameter int unsigned TIMEOUT = 2048,
  parameter int unsigned P_C     = 50,
  parameter int unsigned T_C     = 16,
  parameter int unsigned MAX_PKT = 5,
  parameter logic [31:0] SEED    = 32'h1234_5679
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     chaff_en,
  // IP side
  input  logic     ip_in_valid,
  output logic     ip_in_ready,
  input  ip_flit_t ip_in,
  output logic     ip_out_valid,
  input  logic     ip_out_ready,
  output ip_flit_t ip_out,
  // router side
  output logic     net_out_valid,
  input  logic     net_out_ready,
  output flit_t    net_out,
  input  logic     net_in_valid,
  output logic     net_in_ready,
  input  flit_t    net_in,
  // status and events
  output logic     tun_valid,
  output coord_t   tun_ep,
  output logic     ev_tunnel_new,
  output logic     ev_chaff_flit,
  output logic     ev_dummy_pkt
);

  localparam coord_t ME = '{y: Y, x: X};
  localparam int unsigned IW = $clog2(MAX_PKT + 2);
  localparam int unsigned CW = $clog2(T_C + 2);

  // ---------------- shared random source ----------------
  logic [31:0] rnd;
  lfsr_rng #(.SEED(SEED ^ {8'(Y), 8'(X), 16'h0})) u_rng (
    .clk, .rst_n, .en(1'b1), .rnd
  );
  logic [6:0] rand_no;   // rand(0, 99)
  always_comb rand_no = 7'(32'(rnd[19:8]) % 100);
  wire take_chaff = chaff_en && (32'(rand_no) <= P_C);

  // ---------------- tunnel manager ----------------
  logic             tc_valid, tc_ready;
  flit_t            tc_flit;
  logic [VCI_W-1:0] tun_vci;
  logic [KEY_W-1:0] tun_key;

  tunnel_mgr #(.X(X), .Y(Y), .MESH_X(MESH_X), .MESH_Y(MESH_Y), .H_MIN(H_MIN),
               .H_MAX(H_MAX), .TIMEOUT(TIMEOUT)) u_tun (
    .clk, .rst_n, .rnd,
    .tun_valid, .tun_vci, .tun_key, .tun_ep, .renew(ev_tunnel_new),
    .tc_valid, .tc_ready, .tc_flit
  );

  // ---------------- injection ----------------
  typedef enum logic [1:0] {S_FILL, S_SEND, S_DUMMY} state_e;
  state_e            state;
  logic [DATA_W-1:0] bufd [MAX_PKT];
  coord_t            bdest;
  logic [IW-1:0]     bidx;      // flits received of the current IP packet
  logic [IW-1:0]     olen;      // flits to send (with chaff)
  logic [IW-1:0]     oi;        // next flit to send
  logic              has_ch;
  logic [IW-1:0]     chpos;
  logic              cflag;
  logic [CW-1:0]     idle;

  // flit to send from the packet buffer or dummy generator
  flit_t  pkt_flit;
  chaff_e kind;
  always_comb begin
    enc_hdr_t          h;
    logic [IW-1:0]     k;
    kind = (state == S_DUMMY) ? CH_DUMMY : (has_ch ? CH_FLIT : CH_NONE);
    h.tag  = ni_hash(ME);
    h.kind = kind;
    h.pos  = 6'(chpos);
    h.dest = (state == S_DUMMY) ? ME : bdest;
    k = (has_ch && oi > chpos) ? oi - IW'(1) : oi;
    pkt_flit       = '0;
    pkt_flit.ptype = PT_DT;
    if (oi == '0) begin
      pkt_flit.ftype = (olen == IW'(1)) ? FT_HEADTAIL : FT_HEAD;
      pkt_flit.vci   = tun_vci;
      pkt_flit.ehdr  = sym_crypt(tun_key, KEY_W'(h));
    end else begin
      pkt_flit.ftype = (oi == olen - IW'(1)) ? FT_TAIL : FT_BODY;
    end
    if (state == S_DUMMY || (has_ch && oi == chpos))
      pkt_flit.data = {4{rnd}};          // no usable data
    else
      pkt_flit.data = bufd[k < IW'(MAX_PKT) ? k : '0];
  end

  wire at_boundary = (state == S_FILL) || (oi == '0);
  wire send_tc     = tc_valid && at_boundary;
  wire send_pkt    = !send_tc && (state != S_FILL) && tun_valid;

  assign tc_ready      = send_tc && net_out_ready;
  assign net_out_valid = send_tc || send_pkt;
  assign net_out       = send_tc ? tc_flit : pkt_flit;

  wire pkt_fire  = send_pkt && net_out_ready;
  wire last_flit = pkt_fire && (oi == olen - IW'(1));
  wire ip_fire   = ip_in_valid && ip_in_ready;

  assign ip_in_ready = (state == S_FILL);

  // first-scenario check: idle gap longer than T_C, not yet checked
  wire gap_check = (state == S_FILL) && (bidx == '0) && !ip_fire && !cflag &&
                   (32'(idle) > T_C) && tun_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_FILL;
      bdest  <= '0;
      bidx   <= '0;
      olen   <= '0;
      oi     <= '0;
      has_ch <= 1'b0;
      chpos  <= '0;
      cflag  <= 1'b0;
      idle   <= '0;
      ev_chaff_flit <= 1'b0;
      ev_dummy_pkt  <= 1'b0;
    end else begin
      ev_chaff_flit <= 1'b0;
      ev_dummy_pkt  <= 1'b0;
      // idle cycles of the outbound link
      if (net_out_valid && net_out_ready) idle <= '0;
      else if (32'(idle) <= T_C)          idle <= idle + CW'(1);

      unique case (state)
        S_FILL: begin
          if (ip_fire) begin
            if (ip_in.head) bdest <= ip_in.dest;
            if (ip_in.tail) begin
              // second scenario: a packet was received
              logic [IW-1:0] len;
              len    = (ip_in.head ? '0 : bidx) + IW'(1);
              bidx   <= '0;
              oi     <= '0;
              cflag  <= 1'b1;
              state  <= S_SEND;
              if (take_chaff && len >= IW'(2)) begin
                has_ch <= 1'b1;
                chpos  <= IW'(1 + (32'(rnd[7:0]) % 32'(len - IW'(1))));
                olen   <= len + IW'(1);
                ev_chaff_flit <= 1'b1;
              end else begin
                has_ch <= 1'b0;
                olen   <= len;
              end
            end else begin
              bidx <= (ip_in.head ? '0 : bidx) + IW'(1);
            end
          end else if (gap_check) begin
            cflag <= 1'b1;
            if (take_chaff) begin
              has_ch <= 1'b0;
              olen   <= IW'(4 + 32'(rnd[3]));   // rand(4, 5)
              oi     <= '0;
              state  <= S_DUMMY;
              ev_dummy_pkt <= 1'b1;
            end
          end
        end
        S_SEND, S_DUMMY: begin
          if (pkt_fire) begin
            oi <= oi + IW'(1);
            if (last_flit) begin
              oi     <= '0;
              has_ch <= 1'b0;
              cflag  <= 1'b0;       // outputQueue.sendPacket()
              state  <= S_FILL;
            end
          end
        end
        default: state <= S_FILL;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_FILL && ip_fire) begin
      logic [IW-1:0] w;
      w = ip_in.head ? '0 : bidx;
      if (w < IW'(MAX_PKT)) bufd[w] <= ip_in.data;
    end
  end

  // ---------------- ejection ----------------
  assign ip_out_valid = net_in_valid;
  assign net_in_ready = ip_out_ready;
  always_comb begin
    ip_out.head = is_head(net_in.ftype);
    ip_out.tail = is_tail(net_in.ftype);
    ip_out.dest = net_in.dest;
    ip_out.data = net_in.data;
  end

  // ---------------- protocol assertions ----------------
  a_pkt_len: assert property (@(posedge clk) disable iff (!rst_n)
    (ip_fire && !ip_in.tail) |-> ((ip_in.head ? '0 : bidx) < IW'(MAX_PKT - 1)))
    else $error("NI (%0d,%0d): IP packet longer than MAX_PKT", X, Y);
  a_plain_eject: assert property (@(posedge clk) disable iff (!rst_n)
    net_in_valid |-> (net_in.ptype == PT_NORMAL))
    else $error("NI (%0d,%0d): tunnel packet reached the IP (type %0d, vci %0h)", X, Y,
                net_in.ptype, net_in.vci);

endmodule
