// sp_ram: single-port synchronous RAM, one per way for tags, line data and
// replacement state.
//
// One access per cycle: with en high, a write (we high) stores wdata at addr,
// a read (we low) returns mem[addr] on rdata after the clock edge. rdata
// keeps its value in every cycle without a read, which the cache relies on to
// hold candidate tags, data and ages while it waits for memory. The contents
// are not reset; the cache clears what it reads (valid bits and ages) with a
// sweep after reset. Written in the form FPGA tools map to block RAM, as the
// replacement state is in the design's FPGA implementation.
module sp_ram #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned WIDTH = 8
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [WIDTH-1:0]         wdata,
  output logic [WIDTH-1:0]         rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
