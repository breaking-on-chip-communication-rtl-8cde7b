// vci_table: the routing table of one router for outbound tunnels.
//
// Each entry is one row of the paper's routing table (Index -> out VCI): the
// incoming VCI `vin` is the index, and the entry gives either the outgoing VCI
// and output port of the next hop, or, at the tunnel endpoint, the endpoint
// mark and the symmetric key K_S-E shared with the tunnel's source. The paper
// gives the table's contents but not its organisation; here it is a small
// fully associative table (ENTRIES rows) searched in parallel on NRD read
// ports, so every input port of the router can look up its head flit in the
// same cycle.
//
// Tunnels time out at their source, so entries carry a lifetime counter
// loaded with LIFETIME at install and decremented every cycle; an entry whose
// counter reaches zero is invalid. An install whose index is already present
// overwrites that row; otherwise it takes a free row or, when all are full,
// the row closest to expiry. Lifetime and replacement are this design's own
// choices.
//
// Timing: lookups are combinational; an install is written at the clock edge
// and visible to lookups from the next cycle.
module vci_table
  import noc_pkg::*;
#(
  parameter int unsigned ENTRIES  = 16,
  parameter int unsigned NRD      = NPORTS,
  parameter int unsigned LIFETIME = 3072
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // install port
  input  logic                 wr_en,
  input  logic [VCI_W-1:0]     wr_vin,
  input  logic [VCI_W-1:0]     wr_vout,
  input  port_e                wr_port,
  input  logic                 wr_endp,
  input  logic [KEY_W-1:0]     wr_key,
  // lookup ports
  input  logic [VCI_W-1:0]     rd_vin  [NRD],
  output logic                 rd_hit  [NRD],
  output logic [VCI_W-1:0]     rd_vout [NRD],
  output port_e                rd_port [NRD],
  output logic                 rd_endp [NRD],
  output logic [KEY_W-1:0]     rd_key  [NRD],
  output logic [$clog2(ENTRIES+1)-1:0] n_valid
);

  localparam int unsigned LW = $clog2(LIFETIME + 1);

  typedef struct packed {
    logic             valid;
    logic [VCI_W-1:0] vin;
    logic [VCI_W-1:0] vout;
    port_e            port;
    logic             endp;
    logic [KEY_W-1:0] key;
    logic [LW-1:0]    life;
  } entry_t;

  entry_t tab [ENTRIES];

  // ---- lookup ----
  always_comb begin
    for (int r = 0; r < NRD; r++) begin
      rd_hit[r]  = 1'b0;
      rd_vout[r] = '0;
      rd_port[r] = P_LOCAL;
      rd_endp[r] = 1'b0;
      rd_key[r]  = '0;
      for (int e = 0; e < ENTRIES; e++) begin
        if (tab[e].valid && tab[e].vin == rd_vin[r]) begin
          rd_hit[r]  = 1'b1;
          rd_vout[r] = tab[e].vout;
          rd_port[r] = tab[e].port;
          rd_endp[r] = tab[e].endp;
          rd_key[r]  = tab[e].key;
        end
      end
    end
  end

  // ---- victim row for an install ----
  logic [$clog2(ENTRIES)-1:0] victim;
  always_comb begin
    logic          found;
    logic [LW-1:0] best_life;
    found     = 1'b0;
    victim    = '0;
    best_life = '1;
    // same index already present: overwrite it
    for (int e = 0; e < ENTRIES; e++) begin
      if (!found && tab[e].valid && tab[e].vin == wr_vin) begin
        found  = 1'b1;
        victim = e[$clog2(ENTRIES)-1:0];
      end
    end
    // else a free row
    for (int e = 0; e < ENTRIES; e++) begin
      if (!found && !tab[e].valid) begin
        found  = 1'b1;
        victim = e[$clog2(ENTRIES)-1:0];
      end
    end
    // else the row closest to expiry
    if (!found) begin
      for (int e = 0; e < ENTRIES; e++) begin
        if (tab[e].life < best_life) begin
          best_life = tab[e].life;
          victim    = e[$clog2(ENTRIES)-1:0];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < ENTRIES; e++) tab[e] <= '0;
    end else begin
      for (int e = 0; e < ENTRIES; e++) begin
        if (tab[e].valid) begin
          if (tab[e].life <= LW'(1)) tab[e].valid <= 1'b0;
          tab[e].life <= tab[e].life - LW'(1);
        end
      end
      if (wr_en) begin
        tab[victim] <= '{valid: 1'b1, vin: wr_vin, vout: wr_vout, port: wr_port,
                         endp: wr_endp, key: wr_key, life: LW'(LIFETIME)};
      end
    end
  end

  always_comb begin
    n_valid = '0;
    for (int e = 0; e < ENTRIES; e++) n_valid += tab[e].valid;
  end

endmodule
