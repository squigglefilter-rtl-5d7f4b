// sf_pkg: types and constants shared by the SquiggleFilter blocks.
//
// The accelerator compares a normalised nanopore current trace (the query, one
// read prefix) with the expected current trace of a viral genome (the
// reference) using a modified subsequence dynamic time warping (sDTW).  All
// arithmetic is integer:
//   * raw ADC samples are 10 bits unsigned,
//   * normalised query and reference samples are 8-bit two's complement
//     fixed point with 5 fraction bits, covering [-4, 4),
//   * alignment costs are signed (the match bonus can make them negative).
// Sample widths, the PE count, the tile count and the bonus constant 10 come
// from the paper; the cost width, the bonus field width and the 32-bit
// intermediate-score word are this design's choices (a 32-bit word per cycle
// matches the 10 GB/s per tile at 2.5 GHz that the paper quotes for
// multi-stage filtering).
package sf_pkg;

  localparam int RAW_W   = 10;   // raw ADC sample width
  localparam int SAMP_W  = 8;    // normalised query / reference sample width
  localparam int COST_W  = 24;   // signed alignment cost width
  localparam int BONUS_W = 8;    // unsigned match-bonus field width
  localparam int ID_W    = 16;   // read identifier width

  localparam int unsigned DEF_N_PE      = 2000;    // PEs per tile = query prefix length
  localparam int unsigned DEF_N_TILES   = 5;
  localparam int unsigned DEF_REF_DEPTH = 102400;  // 100 KB of 8-bit reference samples
  localparam int unsigned DEF_BONUS     = 10;      // match bonus per aligned signal
  localparam int unsigned DEF_MAX_BONUS = 90;      // cap before the final +BONUS (total <= 100)

  typedef logic signed [SAMP_W-1:0]  samp_t;
  typedef logic        [RAW_W-1:0]   raw_t;
  typedef logic signed [COST_W-1:0]  cost_t;
  typedef logic        [BONUS_W-1:0] bonus_t;
  typedef logic        [ID_W-1:0]    read_id_t;

  // Largest cost: used where a predecessor cell does not exist.
  localparam cost_t COST_MAX = {1'b0, {(COST_W-1){1'b1}}};

  // One intermediate score: the cost of a last-row cell and its bonus, as
  // written to and read back from DRAM for multi-stage filtering (32 bits).
  typedef struct packed {
    bonus_t bonus;
    cost_t  cost;
  } iscore_t;

  // Per-read tag that travels with a query through a tile.
  typedef struct packed {
    read_id_t id;
    logic     cont;   // continue from intermediate scores of an earlier stage
    logic     save;   // write this stage's intermediate scores out
  } rtag_t;

  // Decision reported for a read.
  typedef struct packed {
    read_id_t id;
    logic     eject;     // 1: not the target virus, reverse the pore
    cost_t    min_cost;  // minimum last-row cost over the reference
  } result_t;

endpackage
