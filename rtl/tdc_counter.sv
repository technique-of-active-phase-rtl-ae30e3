// tdc_counter: photon counting front end for the two interferometer outputs.
//
// Each detector pulse input is synchronised with two flip-flops and its rising
// edge is counted, one counter per output port. The counters count only while
// `gate` is high and are zeroed by `clear`, so the sequencer opens a count
// window with `clear` and reads cnt1/cnt2 (C1, C2) after closing `gate`.
// A pulse must stay low for at least one clock cycle between photons.
// Counters saturate at all ones.
//
// Timing: a pulse edge appears in the counters three cycles after it reaches
// the pin (two synchroniser stages, then the counter register).
//
// The paper calls this module a TDC and states that it distinguishes and
// counts the single photons and passes the counts to the algorithm; only that
// counting function is built here. Synchroniser depth and saturation are this
// design's own choices.
module tdc_counter #(
  parameter int unsigned CNT_W = 24
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [1:0]       apd_pulse,
  input  logic             clear,
  input  logic             gate,
  output logic [CNT_W-1:0] cnt1,
  output logic [CNT_W-1:0] cnt2,
  output logic [1:0]       hit
);

  logic [1:0] s1, s2, s3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1 <= '0;
      s2 <= '0;
      s3 <= '0;
    end else begin
      s1 <= apd_pulse;
      s2 <= s1;
      s3 <= s2;
    end
  end

  assign hit = s2 & ~s3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt1 <= '0;
      cnt2 <= '0;
    end else if (clear) begin
      cnt1 <= '0;
      cnt2 <= '0;
    end else if (gate) begin
      if (hit[0] && cnt1 != '1) cnt1 <= cnt1 + 1'b1;
      if (hit[1] && cnt2 != '1) cnt2 <= cnt2 + 1'b1;
    end
  end

endmodule
