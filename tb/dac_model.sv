// dac_model: behavioural model of the SPI DAC that drives the phase
// modulator (testbench only). It samples `din` on falling edges of `sclk`
// while `sync_n` is low; a 24-bit frame {cmd, addr, data} with cmd 1 loads
// the input register, and a low level on `ldac_n` copies it to the output
// code. `frames` counts the frames received, `bad_frames` those that were
// not 24 bits long.
module dac_model (
  input  logic        sclk,
  input  logic        sync_n,
  input  logic        din,
  input  logic        ldac_n,
  output logic [15:0] out_code,
  output logic [15:0] input_reg,
  output int          frames,
  output int          bad_frames
);
  logic [23:0] sh;
  int          n;

  initial begin
    out_code = 16'h8000; input_reg = 16'h8000; frames = 0; bad_frames = 0; n = 0; sh = '0;
  end

  always @(negedge sclk) if (!sync_n) begin
    sh = {sh[22:0], din};
    n++;
  end

  always @(posedge sync_n) begin
    if (n == 24 && sh[23:20] == 4'h1) begin
      input_reg = sh[15:0];
      frames++;
    end else if (n != 0) begin
      bad_frames++;
    end
    n = 0;
  end

  always @(negedge ldac_n) out_code = input_reg;
endmodule
