// host_if: register interface between the control FPGA and the CPLD that
// bridges to the PXI bus.
//
// A simple synchronous bus: `rd` or `wr` for one cycle with `addr` (and
// `wdata`); read data return with `rvalid` two cycles after `rd`.
// Word address map:
//   0x0000 STATUS    (ro) [0] stage (1 = QKD), [1] table valid,
//                         [2] preparation pass running, [3] GPS pulse seen
//   0x0001 CONTROL   (rw) [0] enable (1 after reset)
//   0x0002 SECONDS   (ro) seconds since reset
//   0x0003 RN_TOTAL  (ro) random numbers recorded since reset
//   0x0004 UNDERRUNS (ro) QKD slots without a fresh random number
//   0x0005 DAC_CODE  (ro) code now on the DAC output
//   0x1000 + p       (ro) reference-table entry of path p:
//                         [31:16] step-23 check fraction, [15:0] code
//   0x4000 + i       (ro) random-number record entry i (0..8191)
// Unmapped addresses read as 0.
//
// The paper shows an interface block towards the CPLD and PXI bus but gives
// neither its protocol nor its contents; the bus and the map are this
// design's own choices, exposing what the paper says is stored (the
// reference table and the recorded random numbers).
module host_if
  import apsc_pkg::*;
#(
  parameter int unsigned RN_DEPTH = 8192
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [15:0]                 addr,
  input  logic                        wr,
  input  logic                        rd,
  input  logic [31:0]                 wdata,
  output logic [31:0]                 rdata,
  output logic                        rvalid,
  output logic                        enable,
  input  stage_e                      stage,
  input  logic                        table_valid,
  input  logic                        prep_busy,
  input  logic                        pps_seen,
  input  logic [31:0]                 sec_cnt,
  input  logic [31:0]                 rn_total,
  input  logic                        underrun,
  input  code_t                       dac_applied,
  output path_t                       tbl_addr,
  input  ref_entry_t                  tbl_data,
  output logic [$clog2(RN_DEPTH)-1:0] rn_addr,
  input  path_t                       rn_data
);

  typedef enum logic [1:0] {SEL_REG, SEL_TBL, SEL_RN, SEL_NONE} sel_e;

  sel_e        sel_q;
  logic        rd_q;
  logic [31:0] reg_q;
  logic [31:0] underruns;
  sel_e        sel;
  logic [31:0] reg_d;

  assign tbl_addr = addr[PATH_W-1:0];
  assign rn_addr  = addr[$clog2(RN_DEPTH)-1:0];

  always_comb begin
    reg_d = '0;
    sel   = SEL_NONE;
    if (addr[15:12] == 4'h0) begin
      sel = SEL_REG;
      case (addr[11:0])
        12'h000: reg_d = {28'd0, pps_seen, prep_busy, table_valid, stage == STAGE_QKD};
        12'h001: reg_d = {31'd0, enable};
        12'h002: reg_d = sec_cnt;
        12'h003: reg_d = rn_total;
        12'h004: reg_d = underruns;
        12'h005: reg_d = {16'd0, dac_applied};
        default: reg_d = '0;
      endcase
    end else if (addr[15:12] == 4'h1 && addr[11:PATH_W] == '0) begin
      sel = SEL_TBL;
    end else if (addr[15:14] == 2'b01 && int'(addr[13:0]) < int'(RN_DEPTH)) begin
      sel = SEL_RN;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      enable    <= 1'b1;
      underruns <= '0;
      sel_q     <= SEL_NONE;
      rd_q      <= 1'b0;
      reg_q     <= '0;
      rdata     <= '0;
      rvalid    <= 1'b0;
    end else begin
      if (underrun) underruns <= underruns + 1'b1;
      if (wr && addr == 16'h0001) enable <= wdata[0];
      rd_q  <= rd;
      sel_q <= sel;
      reg_q <= reg_d;
      rvalid <= rd_q;
      case (sel_q)
        SEL_REG: rdata <= reg_q;
        SEL_TBL: rdata <= tbl_data;
        SEL_RN:  rdata <= {25'd0, rn_data};
        default: rdata <= '0;
      endcase
    end
  end

endmodule
