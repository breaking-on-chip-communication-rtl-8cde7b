// flit_fifo: input buffer of one router port.
//
// A plain synchronous FIFO of DEPTH flits with a valid/ready handshake on both
// sides: a flit is written when in_valid && in_ready, read when
// out_valid && out_ready. in_ready depends only on the fill level, never on
// in_valid, so chains of routers have no combinational loop. The head flit
// is visible on `out_flit` in the cycle after it is written. The depth is this
// design's choice (4, as in common cycle-level NoC models).
module flit_fifo
  import noc_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  flit_t in_flit,
  output logic  out_valid,
  input  logic  out_ready,
  output flit_t out_flit
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  flit_t          mem [DEPTH];
  logic [AW-1:0]  rd_ptr, wr_ptr;
  logic [AW:0]    count;

  wire do_wr = in_valid && in_ready;
  wire do_rd = out_valid && out_ready;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_flit  = mem[rd_ptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_wr) wr_ptr <= (wr_ptr == AW'(DEPTH-1)) ? '0 : wr_ptr + AW'(1);
      if (do_rd) rd_ptr <= (rd_ptr == AW'(DEPTH-1)) ? '0 : rd_ptr + AW'(1);
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= in_flit;
  end

endmodule
