// tb_dac_code: self-checking test of the DAC code module with the SPI
// master and a behavioural DAC. Single codes must reach the DAC output
// within one frame plus a few cycles, and `applied` must follow. A burst of
// codes faster than the SPI link must end with the last code on the DAC
// (older pending codes are replaced), and no frame may be malformed.
module tb_dac_code;
  import apsc_pkg::*;
  logic clk = 0, rst_n = 0, code_valid = 0;
  code_t code = '0, applied;
  logic [23:0] frame;
  logic spi_start, spi_done, spi_busy, ldac_n, pending;
  logic sclk, sync_n, mosi;
  logic [15:0] out_code, input_reg;
  int frames, bad_frames;
  int checks = 0, failures = 0;

  dac_code dut (.clk, .rst_n, .code, .code_valid, .frame, .spi_start, .spi_done, .ldac_n, .applied, .pending);
  spi_master #(.FRAME_W(24), .HALF_DIV(2)) u_spi (.clk, .rst_n, .start(spi_start), .frame, .sclk, .sync_n, .mosi, .busy(spi_busy), .done(spi_done));
  dac_model u_dac (.sclk, .sync_n, .din(mosi), .ldac_n, .out_code, .input_reg, .frames, .bad_frames);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    code_t c;
    int lat;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (3) @(posedge clk);
    for (int i = 0; i < 40; i++) begin
      c = code_t'($urandom);
      code <= c; code_valid <= 1; @(posedge clk); code_valid <= 0;
      lat = 1;
      while (out_code != c && lat < 500) begin @(posedge clk); lat++; end
      checks += 2;
      if (out_code != c) begin failures++; $display("FAIL code %h not on DAC (%h)", c, out_code); end
      if (lat > 24 * 4 + 10) begin failures++; $display("FAIL latency %0d", lat); end
      repeat (3) @(posedge clk);
      checks++;
      if (applied != c) begin failures++; $display("FAIL applied %h exp %h", applied, c); end
      repeat ($urandom_range(0, 20)) @(posedge clk);
    end
    // burst: 5 codes in 5 cycles
    for (int i = 0; i < 5; i++) begin
      c = code_t'($urandom);
      code <= c; code_valid <= 1; @(posedge clk);
    end
    code_valid <= 0;
    repeat (600) @(posedge clk);
    checks += 3;
    if (out_code != c) begin failures++; $display("FAIL burst: %h exp %h", out_code, c); end
    if (applied != c) begin failures++; $display("FAIL burst applied"); end
    if (bad_frames != 0) begin failures++; $display("FAIL %0d bad frames", bad_frames); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
