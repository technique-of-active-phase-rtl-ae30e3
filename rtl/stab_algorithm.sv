// stab_algorithm: the stabilization algorithm module of the control FPGA.
//
// It joins the two halves of each second:
//  - preparation stage: at the start of a second in which `prep` is high,
//    prep_sequencer calibrates all 128 paths (with ls_solver) and rewrites
//    the reference table;
//  - QKD stage: once a full calibration pass has completed, qkd_ctrl
//    switches the path by random number at every slot tick and sets the PM
//    code from the table.
// The stage decides which half drives the path (Pockels gates), the PM code
// and the photon-count window. `enable` stops both halves (the path and code
// stay where they were). The host reads the table through port B.
//
// Timing: a pass starts at `sec_start`; the table is valid after its first
// `done`. Codes leave with a one-cycle `code_valid` pulse.
//
// The split into a preparation stage and a QKD stage and what each does are
// the paper's; the enable bit and the rule that QKD switching waits for a
// complete table are this design's own choices.
module stab_algorithm
  import apsc_pkg::*;
#(
  parameter int unsigned PERM_CYCLES   = 250_000,
  parameter int unsigned STEP_CYCLES   = 10_869,
  parameter int unsigned SETTLE_CYCLES = 1_000,
  parameter int unsigned CNT_W         = 24
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             enable,
  input  logic             sec_start,
  input  logic             prep,
  input  logic             slot_tick,
  input  logic [CNT_W-1:0] cnt1,
  input  logic [CNT_W-1:0] cnt2,
  output logic             tdc_clear,
  output logic             tdc_gate,
  input  path_t            rn,
  input  logic             rn_valid,
  output logic             rn_take,
  output path_t            path,
  output code_t            code,
  output logic             code_valid,
  output logic             rec_we,
  output path_t            rec_data,
  input  path_t            host_tbl_addr,
  output ref_entry_t       host_tbl_data,
  output stage_e           stage,
  output logic             table_valid,
  output logic             prep_busy,
  output logic             prep_done,
  output logic             underrun,
  output logic             meas_valid,
  output logic [4:0]       meas_step,
  output frac_t            meas_frac,
  output code_t            meas_code
);

  path_t      seq_path, qkd_path, tbl_addr, qkd_raddr;
  code_t      seq_code, qkd_code;
  logic       seq_code_valid, qkd_code_valid, tbl_we, qkd_active;
  ref_entry_t tbl_wdata, tbl_rdata;

  prep_sequencer #(
    .PERM_CYCLES(PERM_CYCLES), .STEP_CYCLES(STEP_CYCLES),
    .SETTLE_CYCLES(SETTLE_CYCLES), .CNT_W(CNT_W)
  ) u_seq (
    .clk, .rst_n,
    .start(enable && sec_start && prep),
    .cnt1, .cnt2, .tdc_clear, .tdc_gate,
    .path(seq_path), .code(seq_code), .code_valid(seq_code_valid),
    .tbl_we, .tbl_addr, .tbl_wdata,
    .busy(prep_busy), .done(prep_done),
    .meas_valid, .meas_step, .meas_frac, .meas_code
  );

  ref_table u_tbl (
    .clk, .we(tbl_we), .waddr(tbl_addr), .wdata(tbl_wdata),
    .raddr_a(qkd_raddr), .rdata_a(tbl_rdata),
    .raddr_b(host_tbl_addr), .rdata_b(host_tbl_data)
  );

  assign qkd_active = enable && !prep && table_valid && !prep_busy;

  qkd_ctrl u_qkd (
    .clk, .rst_n, .active(qkd_active), .slot_tick,
    .rn, .rn_valid, .rn_take,
    .path(qkd_path), .tbl_raddr(qkd_raddr), .tbl_rdata,
    .code(qkd_code), .code_valid(qkd_code_valid),
    .rec_we, .rec_data, .underrun
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         table_valid <= 1'b0;
    else if (prep_done) table_valid <= 1'b1;
  end

  assign stage      = prep ? STAGE_PREP : STAGE_QKD;
  assign path       = prep_busy ? seq_path : qkd_path;
  assign code       = prep_busy ? seq_code : qkd_code;
  assign code_valid = seq_code_valid || qkd_code_valid;

endmodule
