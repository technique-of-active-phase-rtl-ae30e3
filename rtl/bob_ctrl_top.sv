// bob_ctrl_top: the control FPGA of the receiver's interferometer.
//
// The interferometer has 128 delay paths selected by seven fibre delay gates
// (Pockels cells). Each second, aligned to the GPS pulse, is split in two:
//  - a 340 ms preparation stage, in which every path is selected in turn for
//    2.5 ms and a 23-step search over phase-modulator (PM) voltages finds the
//    voltage that maximises the interference visibility at port 1; the
//    results fill a 128-entry reference table;
//  - a 660 ms QKD stage, in which a 7-bit random number selects a new path
//    at every 10 kHz slot and the PM is set to that path's tabled voltage at
//    once. The random numbers are recorded in block RAM.
// Photon pulses from the two detectors at the interferometer outputs are
// counted by tdc_counter; the PM voltage leaves through dac_code and
// spi_master to an external SPI DAC; host_if gives a host (through the CPLD
// and PXI bus, outside this design) access to status, table and record.
//
// Ports: `apd_pulse` detector pulses (bit 0 port 1, bit 1 port 2);
// `gps_pps` GPS pulse per second; `rng_bit`/`rng_strobe` serial random bits;
// `pc_gate` the seven Pockels-cell driver triggers; `dac_*` the SPI DAC
// pins; `bus_*` the host register bus. All clocked by `clk` (100 MHz at the
// default timing parameters); `rst_n` is an asynchronous active-low reset.
//
// The block structure follows the paper's block diagram (TDC, GPS counter,
// stabilization algorithm, BRAM, IOs, DAC code, SPI, interface). The
// external chips (random number generator, DAC, CPLD) and the optics are not
// part of it.
module bob_ctrl_top
  import apsc_pkg::*;
#(
  parameter int unsigned SEC_CYCLES    = 100_000_000,
  parameter int unsigned PREP_CYCLES   = 34_000_000,
  parameter int unsigned SLOT_CYCLES   = 10_000,
  parameter int unsigned PERM_CYCLES   = 250_000,
  parameter int unsigned STEP_CYCLES   = 10_869,
  parameter int unsigned SETTLE_CYCLES = 1_000,
  parameter int unsigned DEAD_CYCLES   = 100,
  parameter int unsigned SPI_HALF_DIV  = 2,
  parameter int unsigned RN_DEPTH      = 8192,
  parameter int unsigned CNT_W         = 24
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [1:0]        apd_pulse,
  input  logic              gps_pps,
  input  logic              rng_bit,
  input  logic              rng_strobe,
  output logic [PATH_W-1:0] pc_gate,
  output logic              dac_sclk,
  output logic              dac_sync_n,
  output logic              dac_din,
  output logic              dac_ldac_n,
  input  logic [15:0]       bus_addr,
  input  logic              bus_wr,
  input  logic              bus_rd,
  input  logic [31:0]       bus_wdata,
  output logic [31:0]       bus_rdata,
  output logic              bus_rvalid
);

  if (N_PATHS * PERM_CYCLES > PREP_CYCLES) begin : g_chk_prep
    $error("128 paths do not fit into the preparation stage");
  end

  // timing
  logic        sec_start, prep, slot_tick, pps_seen;
  logic [26:0] cyc;
  logic [31:0] sec_cnt;

  gps_counter #(
    .SEC_CYCLES(SEC_CYCLES), .PREP_CYCLES(PREP_CYCLES), .SLOT_CYCLES(SLOT_CYCLES)
  ) u_gps (
    .clk, .rst_n, .pps(gps_pps), .sec_start, .prep, .slot_tick, .cyc, .sec_cnt, .pps_seen
  );

  // photon counting
  logic             tdc_clear, tdc_gate;
  logic [CNT_W-1:0] cnt1, cnt2;
  logic [1:0]       hit;

  tdc_counter #(.CNT_W(CNT_W)) u_tdc (
    .clk, .rst_n, .apd_pulse, .clear(tdc_clear), .gate(tdc_gate), .cnt1, .cnt2, .hit
  );

  // random numbers
  path_t       rn;
  logic        rn_valid, rn_take;
  logic [31:0] rn_overwrites;

  rng_if u_rng (
    .clk, .rst_n, .rng_bit, .rng_strobe, .take(rn_take), .rn, .rn_valid, .overwrites(rn_overwrites)
  );

  // algorithm
  logic       enable, rec_we, table_valid, prep_busy, prep_done, underrun, code_valid;
  logic       meas_valid;
  logic [4:0] meas_step;
  frac_t      meas_frac;
  code_t      meas_code, code, dac_applied;
  path_t      path, rec_data, host_tbl_addr;
  ref_entry_t host_tbl_data;
  stage_e     stage;

  stab_algorithm #(
    .PERM_CYCLES(PERM_CYCLES), .STEP_CYCLES(STEP_CYCLES),
    .SETTLE_CYCLES(SETTLE_CYCLES), .CNT_W(CNT_W)
  ) u_alg (
    .clk, .rst_n, .enable, .sec_start, .prep, .slot_tick, .cnt1, .cnt2,
    .tdc_clear, .tdc_gate, .rn, .rn_valid, .rn_take,
    .path, .code, .code_valid, .rec_we, .rec_data,
    .host_tbl_addr, .host_tbl_data,
    .stage, .table_valid, .prep_busy, .prep_done, .underrun,
    .meas_valid, .meas_step, .meas_frac, .meas_code
  );

  // random-number record
  logic [$clog2(RN_DEPTH)-1:0] rn_wptr, rn_raddr;
  logic [31:0]                 rn_total;
  path_t                       rn_rdata;

  rn_bram #(.DEPTH(RN_DEPTH)) u_bram (
    .clk, .rst_n, .we(rec_we), .wdata(rec_data), .wptr(rn_wptr), .total(rn_total),
    .raddr(rn_raddr), .rdata(rn_rdata)
  );

  // Pockels-cell driver outputs
  pockels_io #(.DEAD_CYCLES(DEAD_CYCLES)) u_io (
    .clk, .rst_n, .enable, .slot_tick, .path, .pc_gate
  );

  // PM DAC
  logic [23:0] frame;
  logic        spi_start, spi_done, spi_busy, dac_pending;

  dac_code u_code (
    .clk, .rst_n, .code, .code_valid, .frame, .spi_start, .spi_done,
    .ldac_n(dac_ldac_n), .applied(dac_applied), .pending(dac_pending)
  );

  spi_master #(.FRAME_W(24), .HALF_DIV(SPI_HALF_DIV)) u_spi (
    .clk, .rst_n, .start(spi_start), .frame, .sclk(dac_sclk), .sync_n(dac_sync_n),
    .mosi(dac_din), .busy(spi_busy), .done(spi_done)
  );

  // host
  host_if #(.RN_DEPTH(RN_DEPTH)) u_host (
    .clk, .rst_n, .addr(bus_addr), .wr(bus_wr), .rd(bus_rd), .wdata(bus_wdata),
    .rdata(bus_rdata), .rvalid(bus_rvalid), .enable,
    .stage, .table_valid, .prep_busy, .pps_seen, .sec_cnt, .rn_total, .underrun,
    .dac_applied, .tbl_addr(host_tbl_addr), .tbl_data(host_tbl_data),
    .rn_addr(rn_raddr), .rn_data(rn_rdata)
  );

endmodule
