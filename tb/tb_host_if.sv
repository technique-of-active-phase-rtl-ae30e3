// tb_host_if: self-checking test of the host register interface.
// Small table and record models answer the memory reads one cycle after
// the address, with data given by fixed formulas. The testbench reads
// every register, a sample of table and record entries and an unmapped
// address, checks each value and the two-cycle read latency, writes the
// enable bit and counts underrun pulses.
module tb_host_if;
  import apsc_pkg::*;
  logic clk = 0, rst_n = 0, wr = 0, rd = 0, underrun = 0;
  logic [15:0] addr = '0;
  logic [31:0] wdata = '0, rdata;
  logic rvalid, enable;
  path_t tbl_addr;
  logic [12:0] rn_addr;
  ref_entry_t tbl_data;
  path_t rn_data;
  int checks = 0, failures = 0;

  host_if dut (.clk, .rst_n, .addr, .wr, .rd, .wdata, .rdata, .rvalid, .enable,
               .stage(STAGE_QKD), .table_valid(1'b1), .prep_busy(1'b0), .pps_seen(1'b1),
               .sec_cnt(32'd77), .rn_total(32'd4242), .underrun, .dac_applied(16'hBEEF),
               .tbl_addr, .tbl_data, .rn_addr, .rn_data);

  always_ff @(posedge clk) begin
    tbl_data <= ref_entry_t'({16'(tbl_addr) + 16'h100, 16'(tbl_addr) * 16'd3});
    rn_data  <= path_t'(rn_addr ^ 13'h55);
  end

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_check(logic [15:0] a, logic [31:0] exp);
    int lat;
    @(negedge clk); addr = a; rd = 1;
    @(negedge clk); rd = 0;
    lat = 1;
    while (!rvalid && lat < 10) begin @(negedge clk); lat++; end
    checks += 2;
    if (lat != 2) begin failures++; $display("FAIL latency %0d at %h", lat, a); end
    if (rdata != exp) begin failures++; $display("FAIL addr %h: %h exp %h", a, rdata, exp); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    read_check(16'h0000, 32'h0000_000B);
    read_check(16'h0001, 32'h1);
    read_check(16'h0002, 32'd77);
    read_check(16'h0003, 32'd4242);
    repeat (5) begin @(negedge clk); underrun = 1; @(negedge clk); underrun = 0; end
    read_check(16'h0004, 32'd5);
    read_check(16'h0005, 32'hBEEF);
    for (int i = 0; i < 20; i++) begin
      int p;
      p = $urandom_range(0, 127);
      read_check(16'h1000 + 16'(p), {16'(p) + 16'h100, 16'(p) * 16'd3});
    end
    for (int i = 0; i < 20; i++) begin
      int j;
      j = $urandom_range(0, 8191);
      read_check(16'h4000 + 16'(j), {25'd0, 7'(13'(j) ^ 13'h55)});
    end
    read_check(16'h2345, 32'd0);
    @(negedge clk); addr = 16'h0001; wdata = 32'd0; wr = 1; @(negedge clk); wr = 0;
    checks++;
    if (enable) begin failures++; $display("FAIL enable not cleared"); end
    read_check(16'h0001, 32'h0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
