// sf_ref_buffer: the reference buffer of one tile.
//
// Holds the precomputed, normalised reference squiggle of the target genome
// (both strands), one 8-bit sample per address, 100 KB by default.  It is
// written once during initialisation (from flash, through the host) and then
// read one sample per cycle as the reference streams into the systolic array.
// Each tile has its own copy so that a single read port suffices.
//
// Interface: one write port (we, waddr, wdata) and one synchronous read port
// (re, raddr -> rdata on the next clock edge).  The memory is not reset; a
// reference must be written before it is streamed.
//
// Follows the paper: 100 KB per tile, one read port, loaded at initialisation.
// Own choice: 1 KB = 1024 bytes, so the depth is 102400 samples.
module sf_ref_buffer
  import sf_pkg::*;
#(
  parameter int unsigned DEPTH = DEF_REF_DEPTH,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  samp_t         wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output samp_t         rdata
);

  samp_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
