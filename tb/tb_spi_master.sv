// tb_spi_master: self-checking test of the SPI master.
// Random 24-bit frames are sent; the testbench samples `mosi` on every
// falling edge of `sclk` while `sync_n` is low and compares the collected
// word with the frame. Checks the bit count and the frame duration
// FRAME_W * 2 * HALF_DIV + HALF_DIV + 2 cycles from start to done.
module tb_spi_master;
  localparam int HD = 3;
  logic clk = 0, rst_n = 0, start = 0;
  logic [23:0] frame = '0;
  logic sclk, sync_n, mosi, busy, done;
  int checks = 0, failures = 0;
  logic [23:0] got;
  int nb;

  spi_master #(.FRAME_W(24), .HALF_DIV(HD)) dut (.clk, .rst_n, .start, .frame, .sclk, .sync_n, .mosi, .busy, .done);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge sclk) if (!sync_n && rst_n) begin got = {got[22:0], mosi}; nb++; end

  initial begin
    int lat;
    logic [23:0] f;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (3) @(posedge clk);
    for (int i = 0; i < 50; i++) begin
      f = 24'($urandom);
      got = '0; nb = 0;
      frame <= f; start <= 1; @(posedge clk); start <= 0; frame <= '0;
      lat = 1;
      while (!done) begin @(posedge clk); lat++; end
      checks += 3;
      if (got != f) begin failures++; $display("FAIL frame %h got %h", f, got); end
      if (nb != 24) begin failures++; $display("FAIL %0d bits", nb); end
      if (lat != 24 * 2 * HD + HD + 2) begin failures++; $display("FAIL duration %0d", lat); end
      @(posedge clk);
      checks++;
      if (!sync_n || !sclk) begin failures++; $display("FAIL idle levels"); end
      repeat ($urandom_range(0, 5)) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
