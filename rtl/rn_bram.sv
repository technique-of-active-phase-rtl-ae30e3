// rn_bram: block RAM that records the random numbers used in the QKD stage.
//
// Every `we` stores `wdata` at the write pointer and advances it; the pointer
// wraps after DEPTH entries, so the memory always holds the last DEPTH
// numbers. `total` counts all numbers written since reset, so a reader can
// tell which entries are new. The host reads any entry through `raddr`,
// with the data one cycle later.
//
// Recording the random numbers in block RAM is the paper's; the depth
// (8192, enough for the 6600 slots of one second), the ring order and the
// counters are this design's own choices.
module rn_bram
  import apsc_pkg::*;
#(
  parameter int unsigned DEPTH = 8192
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     we,
  input  path_t                    wdata,
  output logic [$clog2(DEPTH)-1:0] wptr,
  output logic [31:0]              total,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output path_t                    rdata
);

  path_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[wptr] <= wdata;
    rdata <= mem[raddr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      total <= '0;
    end else if (we) begin
      wptr  <= wptr + 1'b1;
      total <= total + 1'b1;
    end
  end

endmodule
