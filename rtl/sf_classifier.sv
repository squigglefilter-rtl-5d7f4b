// sf_classifier: read decision logic behind the last PE of a tile.
//
// Every enabled cycle in which the last PE presents a valid last-row cost
// S[N-1,j], the cost is compared with the programmable threshold and folded
// into a running minimum.  The read matches the target if any last-row cost is
// at or below the threshold, which is the same as the minimum over the
// reference being at or below it; otherwise it is to be ejected.
//
// Interface: start clears the state for a new read (the minimum goes to the
// largest cost, the match flag to 0).  cost_v/cost carry the last PE's output.
// done marks the cycle after the last reference column has been seen; eject
// and min_cost are then valid and hold until the next start.
//
// Follows the paper: compare the last PE's cost with a threshold every cycle
// and eject when the final minimum cost exceeds it.  Own choices: a sticky
// match flag plus a minimum register, and a column counter against the
// reference length to find the end of the read.
module sf_classifier
  import sf_pkg::*;
#(
  parameter int unsigned REF_DEPTH = DEF_REF_DEPTH,
  localparam int unsigned AW = $clog2(REF_DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] ref_len,    // number of reference columns
  input  cost_t         threshold,
  input  logic          cost_v,
  input  cost_t         cost,
  output logic          is_virus,
  output logic          done,
  output logic          eject,
  output cost_t         min_cost
);

  logic [AW-1:0] seen;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seen     <= '0;
      is_virus <= 1'b0;
      min_cost <= COST_MAX;
      done     <= 1'b0;
    end else if (start) begin
      seen     <= '0;
      is_virus <= 1'b0;
      min_cost <= COST_MAX;
      done     <= 1'b0;
    end else if (cost_v && !done) begin
      if (cost <= threshold) is_virus <= 1'b1;
      if (cost < min_cost)   min_cost <= cost;
      seen <= seen + 1'b1;
      if (seen + 1'b1 == ref_len) done <= 1'b1;
    end
  end

  assign eject = !is_virus;

endmodule
