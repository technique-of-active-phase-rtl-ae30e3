// rng_model: behavioural model of the physical random number chip
// (testbench only). Sends pseudo-random bits, one per rising edge of
// `strobe`, every BIT_CYCLES/2 cycles high and low, while `pause` is low.
module rng_model #(
  parameter int BIT_CYCLES = 40
) (
  input  logic clk,
  input  logic pause,
  output logic bit_o,
  output logic strobe
);
  int cnt;
  initial begin bit_o = 0; strobe = 0; cnt = 0; end
  always @(posedge clk) begin
    if (!pause) begin
      cnt++;
      if (cnt == BIT_CYCLES / 2) begin
        strobe <= 1'b1;
      end else if (cnt >= BIT_CYCLES) begin
        strobe <= 1'b0;
        bit_o  <= 1'($urandom);
        cnt = 0;
      end
    end
  end
endmodule
