// prep_sequencer: the stabilization preparation stage.
//
// After `start` the sequencer selects paths 0..N_PATHS-1 in order, each for
// PERM_CYCLES (2.5 ms). Inside a path it runs 23 steps of STEP_CYCLES each.
// Every step sets the PM code, waits SETTLE_CYCLES for the DAC, the
// modulator and the Pockels cells to settle, counts photons on both outputs
// until CALC_CYCLES before the step ends, and then computes the port-1
// fraction f = C1 / (C1 + C2). The step codes (step numbers as in the paper,
// 1-based) are:
//   1-4   four fixed codes, one quarter phase period apart (extra phases
//         0, 90, 180, 270 degrees); after step 4 the least-squares solver
//         gives PT1;
//   5     PT1;
//   6-14  PT1 + (i-4) * COARSE_STEP, i = 0..8 (0.1 V apart); PT3 is the code
//         with the highest f among them (preliminary calibration);
//   15-22 PT3 + (j-3) * FINE_STEP, j = 0..7; PT5 is the code with the
//         highest f among them (secondary calibration);
//   23    PT5 again, to check it.
// At the end of step 23 the entry {f of step 23, PT5} is written to the
// reference table at the path's address. The rest of the path's PERM_CYCLES
// is idle. `done` pulses when the last path is finished.
//
// Interface: `code_valid` pulses for one cycle with `code` at the first
// cycle of each step; `path` changes at the first cycle of each path;
// `tdc_clear` opens a count window and `tdc_gate` is high during it;
// `meas_valid` reports each step's result. Highest f is the highest
// visibility (C1 - C2) / (C1 + C2); ties keep the earlier step.
//
// The step plan, 2.5 ms per path, 0.1 V coarse interval, 9 + 8 points and
// the final check follow the paper. The position of the points around PT1
// and PT3, the fine interval (0.05 V), the settle time, the step length
// (2.5 ms / 23) and the DAC scale (16384 codes per phase period) are this
// design's own choices.
module prep_sequencer
  import apsc_pkg::*;
#(
  parameter int unsigned N_PATHS_P     = N_PATHS,
  parameter int unsigned PERM_CYCLES   = 250_000,
  parameter int unsigned STEP_CYCLES   = 10_869,
  parameter int unsigned SETTLE_CYCLES = 1_000,
  parameter int unsigned CNT_W         = 24,
  parameter int unsigned P             = 64,
  parameter int unsigned CODES_PER_2PI = 16384,
  parameter int unsigned COARSE_STEP   = 655,
  parameter int unsigned FINE_STEP     = 328
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [CNT_W-1:0] cnt1,
  input  logic [CNT_W-1:0] cnt2,
  output logic             tdc_clear,
  output logic             tdc_gate,
  output path_t            path,
  output code_t            code,
  output logic             code_valid,
  output logic             tbl_we,
  output path_t            tbl_addr,
  output ref_entry_t       tbl_wdata,
  output logic             busy,
  output logic             done,
  output logic             meas_valid,
  output logic [4:0]       meas_step,
  output frac_t            meas_frac,
  output code_t            meas_code
);

  localparam int unsigned CALC_CYCLES = N_FIXED * P + 64;
  localparam int unsigned WIN_END     = STEP_CYCLES - CALC_CYCLES;
  localparam int unsigned SC_W        = $clog2(STEP_CYCLES);
  localparam int unsigned PC_W        = $clog2(PERM_CYCLES);
  localparam int unsigned GRID_STEP   = CODES_PER_2PI / P;
  localparam int signed   GRID_BASE   = int'(DAC_MID) - int'(CODES_PER_2PI / 2);

  // fixed step k sits at grid index k*P/4
  function automatic code_t fixed_code(int k);
    return code_add(code_t'(GRID_BASE), k * int'(CODES_PER_2PI / N_FIXED));
  endfunction

  typedef enum logic [1:0] {C_IDLE, C_DIV, C_LS} calc_e;

  if (N_STEPS * STEP_CYCLES > PERM_CYCLES) begin : g_chk_perm
    $error("23 steps do not fit into PERM_CYCLES");
  end
  if (SETTLE_CYCLES + 16 >= WIN_END) begin : g_chk_step
    $error("no count window left in STEP_CYCLES");
  end

  logic [7:0]        r;
  logic [4:0]        s;
  logic [SC_W-1:0]   step_cyc;
  logic [PC_W-1:0]   perm_cyc;
  code_t             code_cur, code_next;
  code_t             pt1, pt3, best_code;
  frac_t             best_frac;
  frac_t             f_fixed [N_FIXED];
  calc_e             calc;
  logic              step_active;

  logic              div_start, div_done;
  logic [15:0]       div_q;
  logic              ls_start, ls_done;
  logic [$clog2(P)-1:0] ls_idx;
  logic [35:0]       ls_s;

  assign step_active = busy && (s < 5'(N_STEPS));
  assign tdc_clear   = step_active && (step_cyc == SC_W'(SETTLE_CYCLES));
  assign tdc_gate    = step_active && (step_cyc > SC_W'(SETTLE_CYCLES)) && (step_cyc < SC_W'(WIN_END));
  assign div_start   = step_active && (step_cyc == SC_W'(WIN_END));

  frac_div #(.CNT_W(CNT_W)) u_div (
    .clk, .rst_n, .start(div_start), .a(cnt1), .b(cnt2), .done(div_done), .q(div_q)
  );

  ls_solver #(.P(P)) u_ls (
    .clk, .rst_n, .start(ls_start), .frac(f_fixed), .done(ls_done), .best_idx(ls_idx), .best_s(ls_s)
  );

  // best-so-far including the step just measured
  logic  new_best;
  code_t nb_code;
  assign new_best = (s == 5'd5) || (s == 5'd14) || (div_q > best_frac);
  assign nb_code  = new_best ? code_cur : best_code;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r          <= '0;
      s          <= '0;
      step_cyc   <= '0;
      perm_cyc   <= '0;
      busy       <= 1'b0;
      done       <= 1'b0;
      path       <= '0;
      code       <= DAC_MID;
      code_valid <= 1'b0;
      code_cur   <= DAC_MID;
      code_next  <= DAC_MID;
      pt1        <= DAC_MID;
      pt3        <= DAC_MID;
      best_code  <= DAC_MID;
      best_frac  <= '0;
      f_fixed    <= '{default: '0};
      calc       <= C_IDLE;
      ls_start   <= 1'b0;
      tbl_we     <= 1'b0;
      tbl_addr   <= '0;
      tbl_wdata  <= '0;
      meas_valid <= 1'b0;
      meas_step  <= '0;
      meas_frac  <= '0;
      meas_code  <= '0;
    end else begin
      done       <= 1'b0;
      code_valid <= 1'b0;
      ls_start   <= 1'b0;
      tbl_we     <= 1'b0;
      meas_valid <= 1'b0;

      if (start) begin
        busy     <= 1'b1;
        r        <= '0;
        s        <= '0;
        step_cyc <= '0;
        perm_cyc <= '0;
        code_cur <= fixed_code(0);
        calc     <= C_IDLE;
      end else if (busy) begin
        // ---- step start: apply the code, switch the path at step 1 ----
        if (step_active && step_cyc == '0) begin
          code       <= code_cur;
          code_valid <= 1'b1;
          if (s == 5'd0) path <= path_t'(r);
        end
        if (div_start) calc <= C_DIV;

        // ---- result of a step ----
        if (calc == C_DIV && div_done) begin
          meas_valid <= 1'b1;
          meas_step  <= s;
          meas_frac  <= div_q;
          meas_code  <= code_cur;
          calc       <= C_IDLE;
          if (s < 5'(N_FIXED)) begin
            f_fixed[s[1:0]] <= div_q;
            if (s == 5'(N_FIXED - 1)) begin
              ls_start <= 1'b1;
              calc     <= C_LS;
            end else begin
              code_next <= fixed_code(int'(s) + 1);
            end
          end else if (s == 5'd4) begin
            code_next <= code_add(pt1, -4 * int'(COARSE_STEP));
          end else if (s <= 5'd13) begin
            if (new_best) begin
              best_code <= code_cur;
              best_frac <= div_q;
            end
            if (s == 5'd13) begin
              pt3       <= nb_code;
              code_next <= code_add(nb_code, -3 * int'(FINE_STEP));
            end
            else            code_next <= code_add(pt1, (int'(s) - 8) * int'(COARSE_STEP));
          end else if (s <= 5'd21) begin
            if (new_best) begin
              best_code <= code_cur;
              best_frac <= div_q;
            end
            if (s == 5'd21) code_next <= nb_code;
            else            code_next <= code_add(pt3, (int'(s) - 16) * int'(FINE_STEP));
          end else begin
            tbl_we    <= 1'b1;
            tbl_addr  <= path_t'(r);
            tbl_wdata <= '{check_frac: div_q, code: code_cur};
          end
        end
        if (calc == C_LS && ls_done) begin
          pt1       <= code_add(code_t'(GRID_BASE), int'(ls_idx) * int'(GRID_STEP));
          code_next <= code_add(code_t'(GRID_BASE), int'(ls_idx) * int'(GRID_STEP));
          calc      <= C_IDLE;
        end

        // ---- step and path counters ----
        if (step_active) begin
          if (step_cyc == SC_W'(STEP_CYCLES - 1)) begin
            step_cyc <= '0;
            s        <= s + 1'b1;
            code_cur <= code_next;
          end else begin
            step_cyc <= step_cyc + 1'b1;
          end
        end
        if (perm_cyc == PC_W'(PERM_CYCLES - 1)) begin
          perm_cyc <= '0;
          if (r == 8'(N_PATHS_P - 1)) begin
            busy <= 1'b0;
            done <= 1'b1;
          end else begin
            r        <= r + 1'b1;
            s        <= '0;
            step_cyc <= '0;
            code_cur <= fixed_code(0);
          end
        end else begin
          perm_cyc <= perm_cyc + 1'b1;
        end
      end
    end
  end

endmodule
