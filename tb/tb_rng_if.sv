// tb_rng_if: self-checking test of the random-number receiver.
// A serial model of the random chip sends random 7-bit numbers, MSB first,
// one bit per strobe edge. The testbench takes each number when it becomes
// valid and compares it with what it sent; it also leaves two numbers
// untaken and checks that the newer one replaces the older and that the
// loss is counted.
module tb_rng_if;
  import apsc_pkg::*;
  logic clk = 0, rst_n = 0, rng_bit = 0, rng_strobe = 0, take = 0;
  path_t rn;
  logic rn_valid;
  logic [31:0] overwrites;
  int checks = 0, failures = 0;

  rng_if dut (.clk, .rst_n, .rng_bit, .rng_strobe, .take, .rn, .rn_valid, .overwrites);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(path_t v);
    for (int b = 6; b >= 0; b--) begin
      rng_bit <= v[b];
      repeat (3) @(posedge clk);
      rng_strobe <= 1;
      repeat (3) @(posedge clk);
      rng_strobe <= 0;
    end
  endtask

  initial begin
    path_t v, v2;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < 100; i++) begin
      v = path_t'($urandom);
      send(v);
      repeat (4) @(posedge clk);
      checks++;
      if (!rn_valid || rn != v) begin failures++; $display("FAIL number %0d: %0d valid %0d exp %0d", i, rn, rn_valid, v); end
      take <= 1; @(posedge clk); take <= 0; @(posedge clk);
      checks++;
      if (rn_valid) begin failures++; $display("FAIL valid after take"); end
    end
    v = path_t'($urandom); v2 = path_t'($urandom);
    send(v); send(v2);
    repeat (4) @(posedge clk);
    checks += 2;
    if (rn != v2 || !rn_valid) begin failures++; $display("FAIL newer number not kept"); end
    if (overwrites != 1) begin failures++; $display("FAIL overwrites %0d", overwrites); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
