// tb_tdc_counter: self-checking test of the photon counter.
// Random pulse trains (pulses one to three cycles long, gaps of at least one
// cycle) are sent to both inputs; the testbench counts the rising edges that
// fall into the gate window itself and compares with cnt1/cnt2 after the
// window. Also checks clear, and that no count happens outside the gate.
module tb_tdc_counter;
  logic clk = 0, rst_n = 0;
  logic [1:0] apd = '0;
  logic clear = 0, gate = 0;
  logic [23:0] cnt1, cnt2;
  logic [1:0] hit;
  int checks = 0, failures = 0;
  int exp1, exp2;

  tdc_counter dut (.clk, .rst_n, .apd_pulse(apd), .clear, .gate, .cnt1, .cnt2, .hit);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // pulse generator per channel
  task automatic drive(int ch, int n_pulses);
    for (int i = 0; i < n_pulses; i++) begin
      int hi, lo;
      hi = 1 + $urandom_range(0, 2);
      lo = 1 + $urandom_range(0, 5);
      apd[ch] <= 1'b1;
      repeat (hi) @(posedge clk);
      apd[ch] <= 1'b0;
      repeat (lo) @(posedge clk);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (3) @(posedge clk);
    for (int trial = 0; trial < 20; trial++) begin
      int n1, n2;
      n1 = $urandom_range(0, 300);
      n2 = $urandom_range(0, 300);
      // pulses outside the gate must not count
      fork drive(0, 5); drive(1, 7); join
      repeat (4) @(posedge clk);
      clear <= 1; @(posedge clk); clear <= 0;
      gate <= 1;
      fork drive(0, n1); drive(1, n2); join
      repeat (4) @(posedge clk);   // let the synchroniser drain
      gate <= 0;
      @(posedge clk);
      checks++;
      if (cnt1 != 24'(n1) || cnt2 != 24'(n2)) begin
        failures++;
        $display("FAIL trial %0d: cnt1=%0d exp %0d, cnt2=%0d exp %0d", trial, cnt1, n1, cnt2, n2);
      end
      // no counting while gate is low
      fork drive(0, 3); drive(1, 3); join
      repeat (4) @(posedge clk);
      checks++;
      if (cnt1 != 24'(n1) || cnt2 != 24'(n2)) begin
        failures++;
        $display("FAIL trial %0d: counted outside the gate", trial);
      end
    end
    clear <= 1; @(posedge clk); clear <= 0; @(posedge clk);
    checks++;
    if (cnt1 != 0 || cnt2 != 0) begin failures++; $display("FAIL clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
