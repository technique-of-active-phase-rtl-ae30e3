// tb_qkd_ctrl: self-checking test of QKD-stage switching.
// A table model answers reads one cycle after the address, with a code
// derived from the address by a fixed formula. At every slot tick the
// testbench checks that the path and the recorded number equal the random
// number offered, that the code for that path follows three cycles after
// the tick, that `rn_take` or `underrun` is raised as appropriate, and
// that nothing happens while `active` is low.
module tb_qkd_ctrl;
  import apsc_pkg::*;
  logic clk = 0, rst_n = 0, active = 0, slot_tick = 0, rn_valid = 0;
  path_t rn = '0, path, tbl_raddr, rec_data;
  ref_entry_t tbl_rdata;
  code_t code;
  logic code_valid, rec_we, rn_take, underrun;
  int checks = 0, failures = 0;

  qkd_ctrl dut (.clk, .rst_n, .active, .slot_tick, .rn, .rn_valid, .rn_take, .path, .tbl_raddr,
                .tbl_rdata, .code, .code_valid, .rec_we, .rec_data, .underrun);

  function automatic code_t code_of(path_t p);
    return code_t'(16'h1234 + 16'(p) * 16'd417);
  endfunction

  always_ff @(posedge clk) tbl_rdata <= '{check_frac: 16'h7000, code: code_of(tbl_raddr)};

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_switch = 0, n_under = 0;
  initial begin
    path_t v;
    logic fresh;
    int cv_at;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 200; s++) begin
      v = path_t'($urandom);
      fresh = ($urandom_range(0, 7) != 0);
      active = (s % 25 != 24);
      rn = v; rn_valid = fresh;
      @(negedge clk); slot_tick = 1;
      @(negedge clk); slot_tick = 0;
      // cycle 1 after the tick
      if (active) begin
        checks += 4;
        if (path != v) begin failures++; $display("FAIL path %0d exp %0d", path, v); end
        if (!rec_we || rec_data != v) begin failures++; $display("FAIL record"); end
        if (rn_take != fresh) begin failures++; $display("FAIL take"); end
        if (underrun != !fresh) begin failures++; $display("FAIL underrun"); end
        if (!fresh) n_under++;
        cv_at = 0;
        for (int c = 2; c <= 6; c++) begin
          @(negedge clk);
          if (code_valid) cv_at = c;
          if (code_valid && code != code_of(v)) begin failures++; $display("FAIL code %h exp %h", code, code_of(v)); end
        end
        checks++;
        if (cv_at != 3) begin failures++; $display("FAIL code at cycle %0d", cv_at); end
        n_switch++;
      end else begin
        checks++;
        if (rec_we || rn_take) begin failures++; $display("FAIL activity while inactive"); end
        repeat (5) @(negedge clk);
        checks++;
        if (code_valid) begin failures++; $display("FAIL code while inactive"); end
      end
      repeat (10) @(negedge clk);
    end
    checks++;
    if (n_under == 0) begin failures++; $display("FAIL no underrun exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
