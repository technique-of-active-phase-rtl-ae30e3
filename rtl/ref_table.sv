// ref_table: the reference table of compensation codes, one entry per path.
//
// A memory of DEPTH entries of type ref_entry_t ({check fraction, code}),
// written by the preparation stage once per path and second, and read by
// the QKD stage (port A) and by the host (port B). Both reads are
// synchronous: data appear one cycle after the address. A write and a read
// of the same address in one cycle return the old entry.
//
// The table of 128 refreshed compensation values is the paper's; storing the
// step-23 check fraction beside each code, and the two read ports, are this
// design's own choices. The array maps onto block RAM.
module ref_table
  import apsc_pkg::*;
#(
  parameter int unsigned DEPTH = N_PATHS
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  ref_entry_t               wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr_a,
  output ref_entry_t               rdata_a,
  input  logic [$clog2(DEPTH)-1:0] raddr_b,
  output ref_entry_t               rdata_b
);

  ref_entry_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata_a <= mem[raddr_a];
    rdata_b <= mem[raddr_b];
  end

endmodule
