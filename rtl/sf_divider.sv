// sf_divider: sequential unsigned restoring divider, one quotient bit per cycle.
//
// Used by the normaliser to turn the summed absolute deviation of a query into
// a fixed-point reciprocal once per query, so that each sample then needs only
// a multiplication.  A division by zero returns an all-ones quotient.
//
// Interface: pulse start with dividend and divisor; done pulses NW cycles
// later with quotient valid (held until the next start).
module sf_divider #(
  parameter int unsigned NW = 44,   // dividend / quotient width
  parameter int unsigned DW = 34    // divisor width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [NW-1:0] dividend,
  input  logic [DW-1:0] divisor,
  output logic          done,
  output logic [NW-1:0] quotient
);

  localparam int unsigned CW = $clog2(NW + 1);

  logic [DW:0]   rem;
  logic [NW-1:0] num;
  logic [DW-1:0] den;
  logic [CW-1:0] cnt;
  logic          busy;
  logic [DW:0]   trial;

  always_comb trial = {rem[DW-1:0], num[NW-1]} - {1'b0, den};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem      <= '0;
      num      <= '0;
      den      <= '0;
      cnt      <= '0;
      busy     <= 1'b0;
      done     <= 1'b0;
      quotient <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        rem  <= '0;
        num  <= dividend;
        den  <= divisor;
        cnt  <= CW'(NW);
        busy <= 1'b1;
      end else if (busy) begin
        if (!trial[DW]) begin
          rem <= trial;
          num <= {num[NW-2:0], 1'b1};
        end else begin
          rem <= {rem[DW-1:0], num[NW-1]};
          num <= {num[NW-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == CW'(1)) begin
          busy     <= 1'b0;
          done     <= 1'b1;
          quotient <= !trial[DW] ? {num[NW-2:0], 1'b1} : {num[NW-2:0], 1'b0};
        end
      end
    end
  end

endmodule
