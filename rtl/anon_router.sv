// anon_router: 5-port mesh router with outbound-tunnel (VCI) switching and
// tunnel-endpoint obfuscation.
//
// What it does. Every router of the mesh can be an intermediate hop of some
// source's outbound tunnel, the tunnel's endpoint, or neither. The head flit
// of each packet at the front of an input buffer is handled by packet type:
//   PT_NORMAL  dimension-ordered XY routing on the plain destination.
//   PT_TC      (Tunnel Confirmation) the router takes the first layer of the
//              packet, installs it in its routing table (incoming VCI ->
//              outgoing VCI, output port = XY direction to the endpoint),
//              shifts the remaining layers down and forwards the packet; at
//              the endpoint layer the packet is consumed.
//   PT_DT      (Data Transfer) the incoming VCI is looked up. At an
//              intermediate hop the VCI is replaced by the outgoing VCI and
//              the flit goes to the stored port. At the endpoint the
//              encrypted header is decrypted with K_S-E: a dummy packet is
//              discarded whole, a chaff flit at the recorded position is
//              discarded, and the packet continues as a PT_NORMAL packet to
//              its true destination. A DT head with no table entry is dropped
//              with its packet (vci_miss event).
// Random delay: when delay_en is set, each packet leaving its tunnel here is
// selected with probability P_D percent, and every flit of a selected packet
// is held DELAY_MIN..DELAY_MAX extra cycles at this router.
//
// How it works. Per input: a flit_fifo, and per-packet state (locked output
// port, drop flag, endpoint flag, chaff position, flit index, delay state).
// Per output: wormhole lock plus round-robin arbitration among head flits.
// A flit moves from an input buffer to the neighbour's input buffer in one
// cycle when granted and the neighbour is ready. Only one TC packet may fire
// per cycle (the lowest-numbered input), as the table has one install port.
//
// Interface: valid/ready per port, ports ordered N, E, S, W, Local
// (port_e). `ev` pulses for one cycle per event type when that event happens
// on any input.
//
// From the paper: XY routing, VCI lookup and swap, the table contents
// (index -> out VCI, endpoint), winnowing of chaff at the endpoint, 1-5 cycle
// delays on P_D percent of packets at the endpoint. Own choices: buffer depth,
// arbitration, the single-pass TC install (the paper's TC layers are also
// encrypted per hop with K_S-R, which needs the TA phase not built here),
// per-flit delay and dropping of unmatched DT packets.
module anon_router
  import noc_pkg::*;
#(
  parameter logic [COORD_W-1:0] X = '0,
  parameter logic [COORD_W-1:0] Y = '0,
  parameter int unsigned FIFO_DEPTH = 4,
  parameter int unsigned ENTRIES    = 16,
  parameter int unsigned LIFETIME   = 3072,
  parameter int unsigned P_D        = 50,
  parameter int unsigned DELAY_MIN  = 1,
  parameter int unsigned DELAY_MAX  = 5,
  parameter logic [31:0] SEED       = 32'hACE1_0001
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        delay_en,
  input  logic        in_valid  [NPORTS],
  output logic        in_ready  [NPORTS],
  input  flit_t       in_flit   [NPORTS],
  output logic        out_valid [NPORTS],
  input  logic        out_ready [NPORTS],
  output flit_t       out_flit  [NPORTS],
  output rtr_events_t ev,
  output logic [$clog2(ENTRIES+1)-1:0] n_tunnels
);

  localparam coord_t ME = '{y: Y, x: X};
  localparam int unsigned DRANGE = DELAY_MAX - DELAY_MIN + 1;

  // ---------------- random source ----------------
  logic [31:0] rnd;
  lfsr_rng #(.SEED(SEED ^ {16'h0, 8'(Y), 8'(X)})) u_rng (
    .clk, .rst_n, .en(1'b1), .rnd
  );
  logic       dsel_now;
  logic [2:0] dval_m1;   // chosen delay minus one
  always_comb begin
    dsel_now = delay_en && ((rnd[15:0] % 16'd100) < 16'(P_D));
    dval_m1  = 3'(32'(DELAY_MIN - 1) + (32'(rnd[23:16]) % DRANGE));
  end

  // ---------------- input buffers ----------------
  logic  hv   [NPORTS];
  flit_t hf   [NPORTS];
  logic  fire [NPORTS];

  for (genvar i = 0; i < NPORTS; i++) begin : g_in
    flit_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_valid (in_valid[i]),
      .in_ready (in_ready[i]),
      .in_flit  (in_flit[i]),
      .out_valid(hv[i]),
      .out_ready(fire[i]),
      .out_flit (hf[i])
    );
  end

  // ---------------- routing table ----------------
  logic [VCI_W-1:0] rd_vin  [NPORTS];
  logic             rd_hit  [NPORTS];
  logic [VCI_W-1:0] rd_vout [NPORTS];
  port_e            rd_port [NPORTS];
  logic             rd_endp [NPORTS];
  logic [KEY_W-1:0] rd_key  [NPORTS];

  logic             wr_en;
  tc_layer_t        wr_layer;
  port_e            wr_port;
  logic [KEY_W-1:0] wr_key;

  vci_table #(.ENTRIES(ENTRIES), .NRD(NPORTS), .LIFETIME(LIFETIME)) u_tab (
    .clk, .rst_n,
    .wr_en, .wr_vin(wr_layer.vin), .wr_vout(wr_layer.vout), .wr_port,
    .wr_endp(wr_layer.endp), .wr_key,
    .rd_vin, .rd_hit, .rd_vout, .rd_port, .rd_endp, .rd_key,
    .n_valid(n_tunnels)
  );

  // ---------------- per-input packet state ----------------
  logic       busy  [NPORTS];
  port_e      lport [NPORTS];
  logic       drop  [NPORTS];
  logic       ep    [NPORTS];
  logic       chf   [NPORTS];
  logic [5:0] chpos [NPORTS];
  logic [5:0] fidx  [NPORTS];
  logic       dsel  [NPORTS];
  logic       pend  [NPORTS];
  logic       hsel  [NPORTS];  // head of this packet was selected for delay
  logic [2:0] dcnt  [NPORTS];

  // ---------------- per-input decode ----------------
  logic       head     [NPORTS];
  logic       is_tc    [NPORTS];
  logic       tc_ok    [NPORTS];
  port_e      rport    [NPORTS];
  flit_t      oflit    [NPORTS];
  logic       drop_now [NPORTS];
  logic       new_ep   [NPORTS];
  logic       new_chf  [NPORTS];
  logic [5:0] new_pos  [NPORTS];
  logic       new_drop [NPORTS];  // drop the rest of this packet
  logic       elig     [NPORTS];  // delay satisfied
  logic       load_dly [NPORTS];  // start a delay this cycle
  logic       req      [NPORTS];
  logic       is_miss  [NPORTS];
  logic       is_dummy [NPORTS];
  logic       is_swap  [NPORTS];
  logic       is_chaff [NPORTS];

  always_comb begin
    logic tc_seen;
    tc_seen = 1'b0;
    for (int i = 0; i < NPORTS; i++) begin
      enc_hdr_t  hdr;
      tc_layer_t lay;
      head[i]     = hv[i] && !busy[i] && is_head(hf[i].ftype);
      is_tc[i]    = head[i] && (hf[i].ptype == PT_TC);
      tc_ok[i]    = !is_tc[i] || !tc_seen;
      if (is_tc[i]) tc_seen = 1'b1;
      rd_vin[i]   = hf[i].vci;
      rport[i]    = lport[i];
      oflit[i]    = hf[i];
      drop_now[i] = 1'b0;
      new_drop[i] = 1'b0;
      new_ep[i]   = 1'b0;
      new_chf[i]  = 1'b0;
      new_pos[i]  = '0;
      is_miss[i]  = 1'b0;
      is_dummy[i] = 1'b0;
      is_swap[i]  = 1'b0;
      is_chaff[i] = 1'b0;
      hdr         = enc_hdr_t'(sym_crypt(rd_key[i], hf[i].ehdr));
      lay         = tc_layer_t'(hf[i].data[LAYER_W-1:0]);
      if (head[i]) begin
        unique case (hf[i].ptype)
          PT_DT: begin
            if (!rd_hit[i]) begin
              drop_now[i] = 1'b1;
              new_drop[i] = 1'b1;
              is_miss[i]  = 1'b1;
            end else if (!rd_endp[i]) begin
              oflit[i].vci = rd_vout[i];
              rport[i]     = rd_port[i];
              is_swap[i]   = 1'b1;
            end else if (hdr.kind == CH_DUMMY) begin
              drop_now[i] = 1'b1;
              new_drop[i] = 1'b1;
              is_dummy[i] = 1'b1;
            end else begin
              oflit[i].ptype = PT_NORMAL;
              oflit[i].dest  = hdr.dest;
              oflit[i].vci   = '0;
              oflit[i].ehdr  = '0;
              rport[i]       = xy_route(ME, hdr.dest);
              new_ep[i]      = 1'b1;
              new_chf[i]     = (hdr.kind == CH_FLIT);
              new_pos[i]     = hdr.pos;
            end
          end
          PT_TC: begin
            rport[i]      = xy_route(ME, hf[i].dest);
            oflit[i].data = hf[i].data >> LAYER_W;
            drop_now[i]   = lay.endp;
          end
          default: rport[i] = xy_route(ME, hf[i].dest);
        endcase
      end else if (hv[i] && busy[i]) begin
        is_chaff[i] = ep[i] && chf[i] && (fidx[i] == chpos[i]);
        drop_now[i] = drop[i] || is_chaff[i];
        if (ep[i]) oflit[i].ptype = PT_NORMAL;   // whole packet leaves the tunnel
      end

      // random endpoint delay, per flit of a selected packet
      load_dly[i] = 1'b0;
      elig[i]     = 1'b1;
      if (hv[i] && !drop_now[i]) begin
        if (new_ep[i]) begin
          // the packet's selection is drawn once, when its head first shows
          if (pend[i]) elig[i] = (dcnt[i] == '0);
          else begin
            elig[i]     = !dsel_now;
            load_dly[i] = 1'b1;
          end
        end else if (busy[i] && ep[i] && dsel[i]) begin
          if (pend[i]) elig[i] = (dcnt[i] == '0);
          else begin
            elig[i]     = 1'b0;
            load_dly[i] = 1'b1;
          end
        end
      end

      req[i] = hv[i] && !drop_now[i] && elig[i] && tc_ok[i] && (head[i] || busy[i]);
    end
  end

  // ---------------- output arbitration ----------------
  logic       olock [NPORTS];
  logic [2:0] oown  [NPORTS];
  logic [2:0] rr    [NPORTS];
  logic       gnt   [NPORTS];       // per input
  logic [2:0] gsel  [NPORTS];       // per output: granted input
  logic       gval  [NPORTS];       // per output: a grant exists

  always_comb begin
    logic [2:0] c;
    c = '0;
    for (int i = 0; i < NPORTS; i++) gnt[i] = 1'b0;
    for (int o = 0; o < NPORTS; o++) begin
      gval[o] = 1'b0;
      gsel[o] = '0;
      if (olock[o]) begin
        if (req[oown[o]] && rport[oown[o]] == port_e'(o) && !head[oown[o]]) begin
          gval[o] = 1'b1;
          gsel[o] = oown[o];
        end
      end else begin
        for (int k = 0; k < NPORTS; k++) begin
          c = 3'((32'(rr[o]) + 32'(k)) % NPORTS);
          if (!gval[o] && req[c] && head[c] && rport[c] == port_e'(o)) begin
            gval[o] = 1'b1;
            gsel[o] = c;
          end
        end
      end
      if (gval[o] && out_ready[o]) gnt[gsel[o]] = 1'b1;
    end
  end

  always_comb begin
    for (int i = 0; i < NPORTS; i++)
      fire[i] = (hv[i] && drop_now[i] && tc_ok[i]) || gnt[i];
  end

  for (genvar o = 0; o < NPORTS; o++) begin : g_out
    assign out_valid[o] = gval[o];
    assign out_flit[o]  = oflit[gsel[o]];
  end

  // ---------------- table install from TC ----------------
  always_comb begin
    wr_en    = 1'b0;
    wr_layer = '0;
    wr_port  = P_LOCAL;
    wr_key   = '0;
    for (int i = NPORTS - 1; i >= 0; i--) begin
      if (is_tc[i] && fire[i]) begin
        wr_en    = 1'b1;
        wr_layer = tc_layer_t'(hf[i].data[LAYER_W-1:0]);
        wr_port  = rport[i];
        wr_key   = hf[i].ehdr;
      end
    end
  end

  // ---------------- state update ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NPORTS; i++) begin
        busy[i] <= 1'b0; lport[i] <= P_LOCAL; drop[i] <= 1'b0; ep[i] <= 1'b0;
        chf[i] <= 1'b0; chpos[i] <= '0; fidx[i] <= '0; dsel[i] <= 1'b0;
        pend[i] <= 1'b0; dcnt[i] <= '0; hsel[i] <= 1'b0;
        olock[i] <= 1'b0; oown[i] <= '0; rr[i] <= '0;
      end
    end else begin
      for (int i = 0; i < NPORTS; i++) begin
        // delay counters
        if (load_dly[i]) begin
          pend[i] <= 1'b1;
          dcnt[i] <= (new_ep[i] && !dsel_now) ? '0 : dval_m1;
          hsel[i] <= !new_ep[i] || dsel_now;
        end else if (pend[i] && dcnt[i] != '0) begin
          dcnt[i] <= dcnt[i] - 3'd1;
        end
        if (fire[i]) begin
          pend[i] <= 1'b0;
          if (head[i]) begin
            busy[i]  <= !is_tail(hf[i].ftype);
            lport[i] <= rport[i];
            drop[i]  <= new_drop[i];
            ep[i]    <= new_ep[i];
            chf[i]   <= new_chf[i];
            chpos[i] <= new_pos[i];
            fidx[i]  <= 6'd1;
            dsel[i]  <= new_ep[i] && pend[i] && hsel[i];
          end else begin
            fidx[i] <= fidx[i] + 6'd1;
            if (is_tail(hf[i].ftype)) begin
              busy[i] <= 1'b0;
              drop[i] <= 1'b0;
              ep[i]   <= 1'b0;
              dsel[i] <= 1'b0;
            end
          end
        end
      end
      for (int o = 0; o < NPORTS; o++) begin
        if (gval[o] && out_ready[o]) begin
          rr[o] <= (gsel[o] == 3'(NPORTS - 1)) ? '0 : gsel[o] + 3'd1;
          if (is_tail(hf[gsel[o]].ftype)) olock[o] <= 1'b0;
          else begin
            olock[o] <= 1'b1;
            oown[o]  <= gsel[o];
          end
        end
      end
    end
  end

  // ---------------- events ----------------
  always_comb begin
    ev = '0;
    ev.tc_install = wr_en;
    for (int i = 0; i < NPORTS; i++) begin
      if (fire[i] && is_swap[i])                   ev.vci_swap    = 1'b1;
      if (fire[i] && new_ep[i])                    ev.ep_exit     = 1'b1;
      if (fire[i] && is_chaff[i] && !drop[i])      ev.chaff_drop  = 1'b1;
      if (fire[i] && is_dummy[i])                  ev.dummy_drop  = 1'b1;
      if (load_dly[i] && (!new_ep[i] || dsel_now)) ev.delay_start = 1'b1;
      if (fire[i] && is_miss[i])                   ev.vci_miss    = 1'b1;
    end
  end

  // ---------------- protocol assertions ----------------
  for (genvar i = 0; i < NPORTS; i++) begin : g_chk
    // a packet must start with a head flit
    a_head_first: assert property (@(posedge clk) disable iff (!rst_n)
      (hv[i] && !busy[i]) |-> is_head(hf[i].ftype))
      else $error("router (%0d,%0d) input %0d: body flit without head", X, Y, i);
  end

endmodule
