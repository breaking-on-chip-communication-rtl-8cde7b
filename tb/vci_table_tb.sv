// vci_table_tb: installs tunnel entries, looks them up on several read ports
// at once, overwrites an entry with the same index, checks expiry after
// LIFETIME cycles and replacement of the row closest to expiry when full.
// Expected values come from a small associative-array model in the test.
module vci_table_tb;
  import noc_pkg::*;
  localparam int unsigned ENTRIES = 4, NRD = 3, LIFETIME = 40;

  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_en = 1'b0;
  logic [VCI_W-1:0] wr_vin = '0, wr_vout = '0;
  port_e wr_port = P_LOCAL;
  logic wr_endp = 1'b0;
  logic [KEY_W-1:0] wr_key = '0;
  logic [VCI_W-1:0] rd_vin [NRD];
  logic rd_hit [NRD];
  logic [VCI_W-1:0] rd_vout [NRD];
  port_e rd_port [NRD];
  logic rd_endp [NRD];
  logic [KEY_W-1:0] rd_key [NRD];
  logic [$clog2(ENTRIES+1)-1:0] n_valid;
  int checks = 0, failures = 0;

  vci_table #(.ENTRIES(ENTRIES), .NRD(NRD), .LIFETIME(LIFETIME)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic install(int vin, int vout, port_e p, bit endp, int key);
    @(negedge clk);
    wr_en = 1'b1; wr_vin = VCI_W'(vin); wr_vout = VCI_W'(vout);
    wr_port = p; wr_endp = endp; wr_key = KEY_W'(key);
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  task automatic expect_entry(int r, int vin, bit hit, int vout, port_e p, bit endp, int key);
    rd_vin[r] = VCI_W'(vin);
    #1;
    check(rd_hit[r] == hit, $sformatf("hit of vci %0d on port %0d", vin, r));
    if (hit) begin
      check(rd_vout[r] == VCI_W'(vout), $sformatf("vout of vci %0d", vin));
      check(rd_port[r] == p, $sformatf("port of vci %0d", vin));
      check(rd_endp[r] == endp, $sformatf("endp of vci %0d", vin));
      check(rd_key[r] == KEY_W'(key), $sformatf("key of vci %0d", vin));
    end
  endtask

  initial begin
    for (int r = 0; r < NRD; r++) rd_vin[r] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    expect_entry(0, 0, 0, 0, P_LOCAL, 0, 0);
    install(100, 200, P_EAST, 0, 0);
    install(200, 0, P_LOCAL, 1, 32'hCAFE_F00D);
    install(7, 9, P_SOUTH, 0, 0);
    // three ports in parallel
    @(negedge clk);
    rd_vin[0] = 12'd100; rd_vin[1] = 12'd200; rd_vin[2] = 12'd7;
    #1;
    check(rd_hit[0] && rd_hit[1] && rd_hit[2], "parallel hits");
    check(rd_vout[0] == 12'd200 && rd_port[0] == P_EAST, "port0 data");
    check(rd_endp[1] && rd_key[1] == 32'hCAFE_F00D, "port1 endpoint data");
    check(rd_vout[2] == 12'd9 && rd_port[2] == P_SOUTH, "port2 data");
    check(n_valid == 3, "three valid rows");
    expect_entry(0, 55, 0, 0, P_LOCAL, 0, 0);
    // overwrite same index
    install(7, 11, P_WEST, 0, 0);
    expect_entry(2, 7, 1, 11, P_WEST, 0, 0);
    check(n_valid == 3, "overwrite keeps row count");
    // fill the table, then one more install replaces the oldest (vci 100)
    install(300, 301, P_NORTH, 0, 0);
    check(n_valid == 4, "table full");
    install(400, 401, P_EAST, 0, 0);
    expect_entry(0, 100, 0, 0, P_LOCAL, 0, 0);
    expect_entry(1, 400, 1, 401, P_EAST, 0, 0);
    expect_entry(2, 200, 1, 0, P_LOCAL, 1, 32'hCAFE_F00D);
    // expiry: after LIFETIME cycles with no installs all rows are gone
    repeat (LIFETIME + 2) @(posedge clk);
    #1;
    check(n_valid == 0, "all rows expired");
    expect_entry(0, 400, 0, 0, P_LOCAL, 0, 0);
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
