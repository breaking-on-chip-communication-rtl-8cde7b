// lfsr_rng_tb: checks the tile random number generator against a reference
// Galois-LFSR step written as a bit-wise equation (bit i takes bit i+1, and
// the taps 31, 21, 1, 0 also take the old bit 0), the reset value, the hold
// when `en` is low, and that the sequence does not repeat within 4096 steps.
module lfsr_rng_tb;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [31:0] rnd, model;
  int checks = 0, failures = 0;

  lfsr_rng #(.SEED(32'hDEAD_BEEF)) dut (.clk, .rst_n, .en, .rnd);

  always #5 clk = ~clk;

  function automatic logic [31:0] step(logic [31:0] r);
    logic [31:0] n;
    for (int i = 0; i < 32; i++) n[i] = (i == 31) ? 1'b0 : r[i+1];
    if (r[0]) begin
      n[31] ^= 1'b1; n[21] ^= 1'b1; n[1] ^= 1'b1; n[0] ^= 1'b1;
    end
    return n;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s (rnd=%h model=%h)", what, rnd, model);
    end
  endtask

  logic [31:0] first;
  initial begin
    repeat (2) @(posedge clk);
    #1 check(rnd == 32'hDEAD_BEEF, "reset value");
    rst_n = 1'b1;
    repeat (3) @(posedge clk);
    #1 check(rnd == 32'hDEAD_BEEF, "holds while en=0");
    model = rnd;
    first = rnd;
    en = 1'b1;
    for (int k = 0; k < 4096; k++) begin
      @(posedge clk);
      #1 model = step(model);
      check(rnd == model, "step matches reference");
      if (rnd == first) check(1'b0, "sequence repeated too early");
      if (rnd == 32'h0) check(1'b0, "lock-up state reached");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
