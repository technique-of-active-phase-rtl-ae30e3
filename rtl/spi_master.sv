// spi_master: write-only SPI master for the phase-modulator DAC.
//
// On `start` it lowers `sync_n` and shifts `frame` out MSB first on `mosi`.
// `sclk` idles high; each bit is put on `mosi` while `sclk` is high and the
// DAC samples it on the falling edge. Each half period of `sclk` lasts
// HALF_DIV clock cycles. After the last bit `sync_n` returns high and `done`
// pulses. `busy` is high from the cycle after `start` until `done`.
//
// Timing: from `start` to `done` takes FRAME_W * 2 * HALF_DIV + HALF_DIV + 2
// cycles (24-bit frame at
// 25 MHz: about 1 us).
//
// The paper names an SPI module driving the DAC; the frame length, clock
// rate and clock phase are this design's own choices, typical of 16-bit
// SPI DACs.
module spi_master #(
  parameter int unsigned FRAME_W  = 24,
  parameter int unsigned HALF_DIV = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [FRAME_W-1:0] frame,
  output logic               sclk,
  output logic               sync_n,
  output logic               mosi,
  output logic               busy,
  output logic               done
);

  localparam int unsigned DW = $clog2(HALF_DIV + 1);
  localparam int unsigned BW = $clog2(FRAME_W + 1);

  logic [FRAME_W-1:0] shreg;
  logic [DW-1:0]      div;
  logic [BW-1:0]      nbits;

  assign mosi = shreg[FRAME_W-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg  <= '0;
      div    <= '0;
      nbits  <= '0;
      sclk   <= 1'b1;
      sync_n <= 1'b1;
      busy   <= 1'b0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        shreg  <= frame;
        sync_n <= 1'b0;
        sclk   <= 1'b1;
        busy   <= 1'b1;
        div    <= DW'(HALF_DIV - 1);
        nbits  <= BW'(FRAME_W);
      end else if (busy) begin
        if (div != '0) begin
          div <= div - 1'b1;
        end else begin
          div <= DW'(HALF_DIV - 1);
          if (nbits == '0) begin
            sync_n <= 1'b1;
            busy   <= 1'b0;
            done   <= 1'b1;
          end else if (sclk) begin
            sclk <= 1'b0;                       // DAC samples here
          end else begin
            sclk  <= 1'b1;
            shreg <= {shreg[FRAME_W-2:0], 1'b0};
            nbits <= nbits - 1'b1;
          end
        end
      end
    end
  end

endmodule
