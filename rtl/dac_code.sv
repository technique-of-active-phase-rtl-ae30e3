// dac_code: turns a phase-modulator code into DAC commands.
//
// A new `code` (with `code_valid`) is kept as pending; the latest one wins
// if several arrive while a transfer runs. When the SPI master is free the
// pending code leaves as a 24-bit frame {CMD, ADDR, code}: "write input
// register" of channel A. When the frame has been sent, `ldac_n` is pulsed
// low for LDAC_CYCLES, which moves the input register to the DAC output, and
// `applied` takes the code. So the PM voltage changes at one defined moment
// for every code.
//
// Timing: from `code_valid` to the start of `ldac_n` about one SPI frame
// (~1 us at default settings).
//
// The paper names a DAC code module next to the SPI module, both driving the
// DAC (its Fig. 2 shows one arrow from each). The frame layout, command
// values and load strobe are this design's own choices, modelled on common
// 16-bit SPI DACs.
module dac_code
  import apsc_pkg::*;
#(
  parameter logic [3:0]  CMD         = 4'h1,
  parameter logic [3:0]  ADDR        = 4'h1,
  parameter int unsigned LDAC_CYCLES = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  code_t       code,
  input  logic        code_valid,
  output logic [23:0] frame,
  output logic        spi_start,
  input  logic        spi_done,
  output logic        ldac_n,
  output code_t       applied,
  output logic        pending
);

  localparam int unsigned LW = $clog2(LDAC_CYCLES + 1);

  code_t         pcode, fcode;
  logic          inflight;
  logic [LW-1:0] lcnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pcode     <= DAC_MID;
      fcode     <= DAC_MID;
      pending   <= 1'b0;
      inflight  <= 1'b0;
      spi_start <= 1'b0;
      frame     <= '0;
      ldac_n    <= 1'b1;
      lcnt      <= '0;
      applied   <= DAC_MID;
    end else begin
      spi_start <= 1'b0;
      if (code_valid) begin
        pcode   <= code;
        pending <= 1'b1;
      end
      if (!inflight && lcnt == '0 && (pending || code_valid) && !spi_start) begin
        // send the newest code
        fcode     <= code_valid ? code : pcode;
        frame     <= {CMD, ADDR, code_valid ? code : pcode};
        spi_start <= 1'b1;
        inflight  <= 1'b1;
        pending   <= 1'b0;
      end
      if (spi_done && inflight) begin
        inflight <= 1'b0;
        ldac_n   <= 1'b0;
        lcnt     <= LW'(LDAC_CYCLES);
        applied  <= fcode;
      end else if (lcnt != '0) begin
        lcnt <= lcnt - 1'b1;
        if (lcnt == LW'(1)) ldac_n <= 1'b1;
      end
    end
  end

endmodule
