// rng_if: receiver for the serial output of the physical random number chip.
//
// The chip presents one random bit on `rng_bit` with a rising edge on
// `rng_strobe`. Both are synchronised with two flip-flops; each strobe edge
// shifts the bit in, and every RN_W bits form one number `rn`, MSB first.
// `rn_valid` stays high until `take`; a newer number replaces an untaken
// one (its loss is counted in `overwrites`).
//
// Timing: `rn_valid` rises three cycles after the strobe edge of the last
// bit. The strobe must stay high and low for at least two clock cycles each.
//
// The 7-bit random numbers from an on-board noise chip are the paper's; the
// chip's serial format is not given and the one here is this design's own
// choice.
module rng_if
  import apsc_pkg::*;
#(
  parameter int unsigned RN_W = PATH_W
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            rng_bit,
  input  logic            rng_strobe,
  input  logic            take,
  output logic [RN_W-1:0] rn,
  output logic            rn_valid,
  output logic [31:0]     overwrites
);

  logic [2:0]                st;
  logic [1:0]                bt;
  logic [RN_W-1:0]           shreg;
  logic [$clog2(RN_W+1)-1:0] nbits;
  logic                      edge_s;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= '0;
      bt <= '0;
    end else begin
      st <= {st[1:0], rng_strobe};
      bt <= {bt[0], rng_bit};
    end
  end
  assign edge_s = st[1] & ~st[2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg      <= '0;
      nbits      <= '0;
      rn         <= '0;
      rn_valid   <= 1'b0;
      overwrites <= '0;
    end else begin
      if (take) rn_valid <= 1'b0;
      if (edge_s) begin
        shreg <= {shreg[RN_W-2:0], bt[1]};
        if (nbits == $bits(nbits)'(RN_W - 1)) begin
          nbits    <= '0;
          rn       <= {shreg[RN_W-2:0], bt[1]};
          rn_valid <= 1'b1;
          if (rn_valid && !take) overwrites <= overwrites + 1'b1;
        end else begin
          nbits <= nbits + 1'b1;
        end
      end
    end
  end

endmodule
