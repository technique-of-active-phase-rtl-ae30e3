// gps_counter: one-second frame timing, aligned to the GPS pulse per second.
//
// The rising edge of the (synchronised) GPS pulse restarts a cycle counter
// and marks the start of a second. The first PREP_CYCLES of each second are
// the stabilization preparation stage (`prep` high), the rest is the QKD
// stage. `slot_tick` pulses every SLOT_CYCLES from the start of the second,
// the 10 kHz rate at which the delay gates switch. If no GPS pulse arrives,
// the counter starts a new second by itself after WRAP_CYCLES.
//
// Timing: `sec_start` is high in the cycle in which `cyc` is 0; `slot_tick`
// and `prep` are valid in the same cycle as `cyc`.
//
// The 340 ms / 660 ms split and the 10 kHz slot rate are the paper's numbers.
// The 100 MHz clock, the free-running fallback and its 0.1 % margin are this
// design's own choices.
module gps_counter #(
  parameter int unsigned SEC_CYCLES  = 100_000_000,
  parameter int unsigned PREP_CYCLES = 34_000_000,
  parameter int unsigned SLOT_CYCLES = 10_000,
  parameter int unsigned WRAP_CYCLES = SEC_CYCLES + SEC_CYCLES / 1000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        pps,
  output logic        sec_start,
  output logic        prep,
  output logic        slot_tick,
  output logic [26:0] cyc,
  output logic [31:0] sec_cnt,
  output logic        pps_seen
);

  localparam int unsigned SLOT_W = $clog2(SLOT_CYCLES);

  logic [2:0]        pps_s;
  logic              pps_edge;
  logic [SLOT_W-1:0] slot_cnt;
  logic              started;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pps_s <= '0;
    else        pps_s <= {pps_s[1:0], pps};
  end
  assign pps_edge = pps_s[1] & ~pps_s[2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc       <= '0;
      slot_cnt  <= '0;
      sec_start <= 1'b0;
      sec_cnt   <= '0;
      pps_seen  <= 1'b0;
      started   <= 1'b0;
    end else begin
      sec_start <= 1'b0;
      if (pps_edge || !started || cyc == 27'(WRAP_CYCLES - 1)) begin
        cyc       <= '0;
        slot_cnt  <= '0;
        sec_start <= 1'b1;
        started   <= 1'b1;
        sec_cnt   <= sec_cnt + 1'b1;
        pps_seen  <= pps_edge;
      end else begin
        cyc      <= cyc + 1'b1;
        slot_cnt <= (slot_cnt == SLOT_W'(SLOT_CYCLES - 1)) ? '0 : slot_cnt + 1'b1;
      end
    end
  end

  assign prep      = started && (cyc < 27'(PREP_CYCLES));
  assign slot_tick = started && (slot_cnt == '0);

endmodule
