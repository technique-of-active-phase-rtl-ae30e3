// pockels_io: output stage towards the seven Pockels-cell drivers.
//
// Bit i of the selected path opens delay gate i. The outputs follow the path
// as a train of square pulses: at every slot tick (10 kHz) all outputs go low
// for DEAD_CYCLES, then the gates whose path bit is set go high for the rest
// of the slot. Each driver thus sees one trigger edge per slot in which its
// gate is open, and all seven switch at the same moment. The outputs are
// registered (one cycle of latency) so they can sit in the I/O flip-flops.
//
// Seven gates, driven together at 10 kHz from the path number, follow the
// paper. The low gap at each slot start and its length (1 us) are this
// design's own choices; the paper gives no driver trigger format.
module pockels_io
  import apsc_pkg::*;
#(
  parameter int unsigned DEAD_CYCLES = 100
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              enable,
  input  logic              slot_tick,
  input  path_t             path,
  output logic [PATH_W-1:0] pc_gate
);

  localparam int unsigned DW = $clog2(DEAD_CYCLES + 1);

  logic [DW-1:0] dead;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dead    <= '0;
      pc_gate <= '0;
    end else begin
      if (slot_tick)      dead <= DW'(DEAD_CYCLES - 1);
      else if (dead != 0) dead <= dead - 1'b1;
      pc_gate <= (enable && !slot_tick && dead == '0) ? path : '0;
    end
  end

endmodule
