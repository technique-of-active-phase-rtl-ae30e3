// frac_div: port-1 fraction C1 / (C1 + C2) as an unsigned Q1.15 number.
//
// A bit-serial long division: the first quotient bit is 1 only when C2 is 0,
// then each of the next 15 cycles shifts the remainder left and subtracts the
// denominator when it fits. The result is floor(C1 * 32768 / (C1 + C2)),
// 0 when both counts are 0.
//
// Interface: pulse `start` with `a` (C1) and `b` (C2) valid; `done` pulses
// 17 cycles later with `q` valid, and `q` holds until the next start.
// The visibility (C1 - C2) / (C1 + C2) used in the paper equals 2q - 1, so
// ranking steps by q ranks them by visibility. The divider itself is this
// design's own choice.
module frac_div #(
  parameter int unsigned CNT_W = 24
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [CNT_W-1:0] a,
  input  logic [CNT_W-1:0] b,
  output logic             done,
  output logic [15:0]      q
);

  logic [CNT_W:0]   den;
  logic [CNT_W+1:0] rem;
  logic [4:0]       bitn;
  logic             busy;
  logic [CNT_W+1:0] rem_sh;

  assign rem_sh = {rem[CNT_W:0], 1'b0};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      den  <= '0;
      rem  <= '0;
      bitn <= '0;
      busy <= 1'b0;
      done <= 1'b0;
      q    <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        den  <= {1'b0, a} + {1'b0, b};
        rem  <= {2'b00, a};
        bitn <= 5'd16;
        busy <= 1'b1;
        q    <= '0;
      end else if (busy) begin
        if (bitn == 5'd16) begin
          // integer bit: a >= a + b only when b == 0 (and a > 0)
          if (den != '0 && rem >= (CNT_W+2)'(den)) begin
            q[15] <= 1'b1;
            rem   <= rem - (CNT_W+2)'(den);
          end
        end else begin
          if (den != '0 && rem_sh >= (CNT_W+2)'(den)) begin
            q[bitn[3:0] - 4'd1] <= 1'b1;
            rem          <= rem_sh - (CNT_W+2)'(den);
          end else begin
            rem <= rem_sh;
          end
        end
        if (bitn == 5'd1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        bitn <= bitn - 1'b1;
      end
    end
  end

endmodule
