// qkd_ctrl: path switching and phase compensation in the QKD stage.
//
// While `active` is high, every `slot_tick` (10 kHz) takes the latest 7-bit
// random number, makes it the selected path (one bit per delay gate), reads
// that path's reference-table entry and sends its code to the PM DAC. The
// number is also written to the random-number record. If no fresh number
// has arrived since the last slot, the last one is used again and
// `underrun` pulses.
//
// Timing: cycle 0 slot_tick; cycle 1 `path`, `tbl_raddr`, `rec_we` and
// `rn_take` change; cycle 2 the table data return; cycle 3 `code_valid`.
//
// Switching the gates by the random number at 10 kHz, applying the stored
// compensation at every switch and recording the numbers follow the paper.
// The reuse rule on underrun and the latency are this design's own choices.
module qkd_ctrl
  import apsc_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       active,
  input  logic       slot_tick,
  input  path_t      rn,
  input  logic       rn_valid,
  output logic       rn_take,
  output path_t      path,
  output path_t      tbl_raddr,
  input  ref_entry_t tbl_rdata,
  output code_t      code,
  output logic       code_valid,
  output logic       rec_we,
  output path_t      rec_data,
  output logic       underrun
);

  logic [1:0] pipe;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pipe       <= '0;
      path       <= '0;
      tbl_raddr  <= '0;
      code       <= DAC_MID;
      code_valid <= 1'b0;
      rec_we     <= 1'b0;
      rec_data   <= '0;
      rn_take    <= 1'b0;
      underrun   <= 1'b0;
    end else begin
      rec_we     <= 1'b0;
      rn_take    <= 1'b0;
      underrun   <= 1'b0;
      code_valid <= 1'b0;
      pipe       <= {pipe[0], 1'b0};
      if (active && slot_tick) begin
        path      <= rn;
        tbl_raddr <= rn;
        rec_we    <= 1'b1;
        rec_data  <= rn;
        rn_take   <= rn_valid;
        underrun  <= !rn_valid;
        pipe[0]   <= 1'b1;
      end
      if (pipe[1]) begin
        code       <= tbl_rdata.code;
        code_valid <= 1'b1;
      end
    end
  end

endmodule
