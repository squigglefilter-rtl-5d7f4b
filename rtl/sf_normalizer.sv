// sf_normalizer: mean / mean-absolute-deviation normaliser of a tile.
//
// Turns one query of N raw 10-bit ADC samples into N 8-bit samples
// z = (x - mean) / MAD, clipped to [-4, 4] and written as two's complement
// with 5 fraction bits (z * 32, saturated to [-128, 127]).  It reads the query
// buffer three times:
//   1. mean finder: sum = sum(x), which is N * mean (no division needed);
//   2. MAD finder:  dev = N*x - sum = N*(x - mean); sad = sum(|dev|), which is
//      N*N*MAD.  Then one sequential division forms the reciprocal
//      recip = floor(2^F * 256 * N / sad);
//   3. mean-MAD norm: z256 = (dev * recip) >>> F is z in units of 1/256, kept
//      in a register; the outlier filter clips it to [-4, 4] (+-1024); the
//      re-scaler rounds it to units of 1/32 and saturates to 8 bits.
// Pass 3 walks the buffer from the last sample to the first: the sample that
// enters the PE chain first ends in the last PE, which holds the last query
// row, so the query is sent last sample first.
// A query with sad = 0 (a flat signal) gives all-zero output.
//
// Interface: starts when the query buffer has a full bank (rd_avail); drives
// rd_addr and reads rd_data one cycle later; releases the bank after pass 3.
// Pass 3 waits for out_ready (the PE chain is free) and then sends N samples
// on consecutive cycles (out_valid, out_data; out_last on the final one, with
// the query's tag on out_tag).  Time per query: about 3N + F + 50 cycles.
//
// Follows the paper: mean, MAD, mean-MAD normalisation, outlier filter to
// [-4, 4], re-scaling to 8-bit fixed point, 10-bit input, statistics over
// every N = 2000 samples.  Own choices: the scaled integer formulation, the
// reciprocal by a sequential divider, round-to-nearest in the re-scaler, and
// sending the output to the PE chain (as the paper's tile figure and text do)
// rather than back into the query buffer as its normaliser figure draws it.
module sf_normalizer
  import sf_pkg::*;
#(
  parameter int unsigned N = DEF_N_PE,
  parameter int unsigned F = 32,
  localparam int unsigned AW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  // query buffer read side
  input  logic          rd_avail,
  input  rtag_t         rd_tag,
  output logic [AW-1:0] rd_addr,
  input  raw_t          rd_data,
  output logic          rd_release,
  // normalised output towards the PE query chain
  input  logic          out_ready,
  output logic          out_valid,
  output samp_t         out_data,
  output logic          out_last,
  output rtag_t         out_tag
);

  localparam int unsigned NW   = $clog2(N + 1);
  localparam int unsigned SUMW = RAW_W + NW + 1;          // sum and N*x
  localparam int unsigned DEVW = SUMW + 1;                // signed deviation
  localparam int unsigned SADW = DEVW + NW;               // sum of |dev|
  localparam int unsigned QW   = F + 8 + NW + 1;          // reciprocal dividend / quotient
  localparam int unsigned PW   = DEVW + QW;               // product

  typedef enum logic [2:0] {S_IDLE, S_MEAN, S_MAD, S_DIV, S_WAIT, S_NORM, S_DONE} state_t;
  state_t state;

  logic [NW-1:0]            cnt;       // addresses issued in this pass
  logic                     rv;        // rd_data valid this cycle
  logic                     rv_last;
  logic [SUMW-1:0]          sum;
  logic [SADW-1:0]          sad;
  logic [QW-1:0]            recip;
  logic                     div_start, div_done;
  logic [QW-1:0]            div_q;
  rtag_t                    tag_r;

  // deviation of the sample on rd_data
  logic signed [DEVW-1:0]   dev;
  logic        [DEVW-1:0]   adev;
  always_comb begin
    dev  = $signed({1'b0, SUMW'(rd_data) * SUMW'(N)}) - $signed({1'b0, sum});
    adev = dev[DEVW-1] ? DEVW'(-dev) : DEVW'(dev);
  end

  // mean-MAD norm, register, outlier filter, re-scaler
  logic signed [PW-1:0]     prod;
  logic signed [PW-1:0]     z256;
  logic signed [PW-1:0]     z_reg;
  logic                     z_v, z_last;
  logic signed [11:0]       z_clip;    // [-1024, 1024]
  logic signed [12:0]       z_round;
  logic signed [8:0]        z32;
  always_comb begin
    prod    = PW'(dev) * $signed({1'b0, recip});
    z256    = prod >>> F;
    if (z_reg > PW'(1024))       z_clip = 12'sd1024;
    else if (z_reg < -PW'(1024)) z_clip = -12'sd1024;
    else                         z_clip = z_reg[11:0];
    z_round = (13'(z_clip) + 13'sd4) >>> 3;
    z32     = (z_round > 13'sd127) ? 9'sd127 : z_round[8:0];
  end

  sf_divider #(.NW(QW), .DW(SADW)) u_div (
    .clk     (clk),
    .rst_n   (rst_n),
    .start   (div_start),
    .dividend(QW'(N) << (F + 8)),
    .divisor (sad),
    .done    (div_done),
    .quotient(div_q)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      cnt        <= '0;
      rd_addr    <= '0;
      rv         <= 1'b0;
      rv_last    <= 1'b0;
      sum        <= '0;
      sad        <= '0;
      recip      <= '0;
      div_start  <= 1'b0;
      tag_r      <= '0;
      rd_release <= 1'b0;
      z_reg      <= '0;
      z_v        <= 1'b0;
      z_last     <= 1'b0;
      out_valid  <= 1'b0;
      out_data   <= '0;
      out_last   <= 1'b0;
    end else begin
      div_start  <= 1'b0;
      rd_release <= 1'b0;
      rv         <= 1'b0;
      rv_last    <= 1'b0;
      // norm pipeline: rd_data -> z_reg -> out_data
      z_v       <= (state == S_NORM) && rv;
      z_last    <= rv_last;
      z_reg     <= (sad == '0) ? '0 : z256;
      out_valid <= z_v;
      out_last  <= z_v && z_last;
      out_data  <= samp_t'(z32);

      unique case (state)
        S_IDLE: if (rd_avail) begin
          tag_r   <= rd_tag;
          sum     <= '0;
          sad     <= '0;
          cnt     <= '0;
          rd_addr <= '0;
          state   <= S_MEAN;
        end
        S_MEAN, S_MAD: begin
          // issue addresses 0..N-1; accumulate the data one cycle behind
          if (cnt != NW'(N)) begin
            rv      <= 1'b1;
            rv_last <= (cnt == NW'(N-1));
            rd_addr <= rd_addr + 1'b1;
            cnt     <= cnt + 1'b1;
          end
          if (rv) begin
            if (state == S_MEAN) sum <= sum + SUMW'(rd_data);
            else                 sad <= sad + SADW'(adev);
          end
          if (rv && rv_last) begin
            rd_addr <= '0;
            cnt     <= '0;
            if (state == S_MEAN) state <= S_MAD;
            else begin
              state     <= S_DIV;
              div_start <= 1'b1;
            end
          end
        end
        S_DIV: if (div_done) begin
          recip <= div_q;
          state <= S_WAIT;
        end
        S_WAIT: if (out_ready) begin
          rd_addr <= AW'(N-1);
          cnt     <= '0;
          state   <= S_NORM;
        end
        S_NORM: begin
          // issue addresses N-1..0
          if (cnt != NW'(N)) begin
            rv      <= 1'b1;
            rv_last <= (cnt == NW'(N-1));
            rd_addr <= rd_addr - 1'b1;
            cnt     <= cnt + 1'b1;
          end
          if (rv && rv_last) begin
            rd_release <= 1'b1;
            state      <= S_DONE;
          end
        end
        S_DONE: if (out_last) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign out_tag = tag_r;

endmodule
