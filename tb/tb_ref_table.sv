// tb_ref_table: self-checking test of the reference table.
// Fills all entries, then writes random entries to random addresses while
// reading both ports at random addresses, and compares every read with a
// shadow copy kept by the testbench (a read returns the entry as it was
// before a same-cycle write).
module tb_ref_table;
  import apsc_pkg::*;
  logic clk = 0, we = 0;
  path_t waddr = '0, raddr_a = '0, raddr_b = '0;
  ref_entry_t wdata = '0, rdata_a, rdata_b;
  int checks = 0, failures = 0;
  ref_entry_t shadow [N_PATHS];

  ref_table dut (.clk, .we, .waddr, .wdata, .raddr_a, .rdata_a, .raddr_b, .rdata_b);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_entry_t exp_a, exp_b;
    for (int i = 0; i < N_PATHS; i++) begin
      @(negedge clk);
      we = 1; waddr = path_t'(i); wdata = ref_entry_t'($urandom);
      shadow[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      raddr_a = path_t'($urandom_range(0, N_PATHS - 1));
      raddr_b = path_t'($urandom_range(0, N_PATHS - 1));
      exp_a = shadow[raddr_a]; exp_b = shadow[raddr_b];
      we = ($urandom_range(0, 3) == 0);
      waddr = ($urandom_range(0, 1) == 0) ? raddr_a : path_t'($urandom_range(0, N_PATHS - 1));
      wdata = ref_entry_t'($urandom);
      if (we) shadow[waddr] = wdata;
      @(negedge clk);
      we = 0;
      checks += 2;
      if (rdata_a != exp_a) begin failures++; $display("FAIL port A addr %0d", raddr_a); end
      if (rdata_b != exp_b) begin failures++; $display("FAIL port B addr %0d", raddr_b); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
