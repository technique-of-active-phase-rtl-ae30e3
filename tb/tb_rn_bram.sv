// tb_rn_bram: self-checking test of the random-number record.
// Uses a 64-entry memory. Writes a random sequence longer than the memory
// (so the ring wraps), then reads back every entry and compares it with the
// last value the testbench wrote there; checks the write pointer and the
// total count.
module tb_rn_bram;
  import apsc_pkg::*;
  localparam int D = 64;
  logic clk = 0, rst_n = 0, we = 0;
  path_t wdata = '0, rdata;
  logic [5:0] wptr, raddr = '0;
  logic [31:0] total;
  int checks = 0, failures = 0;
  path_t shadow [D];

  rn_bram #(.DEPTH(D)) dut (.clk, .rst_n, .we, .wdata, .wptr, .total, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    repeat (3) @(negedge clk);
    rst_n = 1;
    n = 150;
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      we = 1; wdata = path_t'($urandom);
      shadow[i % D] = wdata;
      @(negedge clk);
      we = 0;
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    @(negedge clk);
    checks += 2;
    if (total != 32'(n)) begin failures++; $display("FAIL total %0d", total); end
    if (int'(wptr) != n % D) begin failures++; $display("FAIL wptr %0d", wptr); end
    for (int a = 0; a < D; a++) begin
      raddr = 6'(a);
      @(negedge clk);
      checks++;
      if (rdata != shadow[a]) begin failures++; $display("FAIL entry %0d: %0d exp %0d", a, rdata, shadow[a]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
