// sf_query_buffer: the two ping-pong raw-squiggle buffers of a tile.
//
// Raw 10-bit samples of a read prefix are written into one bank while the
// other bank, already full, is read by the normaliser.  A bank holds exactly
// DEPTH samples (one query); it becomes readable when its last sample has been
// written and writable again when the reader releases it.  Each bank also
// keeps the tag of its read (identifier and multi-stage flags), taken with the
// first sample.
//
// Interface: write side is valid/ready (wr_ready is low while both banks are
// full); wr_tag is sampled with the first sample of a query.  Read side:
// rd_avail says a full bank is waiting and rd_tag is its tag; rd_addr gives
// rd_data one cycle later (synchronous read); rd_release frees the bank.
// Banks are filled and drained in alternating order.
//
// Follows the paper: two query buffers so that loading and normalisation
// overlap.  Own choices: the handshake, the tag, and the size of exactly one
// query of 10-bit samples per bank (the paper prints 4 KB in its tile figure
// and 12 KB in its normaliser figure; two 2000 x 10-bit banks are 5000 bytes).
module sf_query_buffer
  import sf_pkg::*;
#(
  parameter int unsigned DEPTH = DEF_N_PE,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  // write side
  input  logic          wr_valid,
  output logic          wr_ready,
  input  raw_t          wr_data,
  input  rtag_t         wr_tag,
  // read side
  output logic          rd_avail,
  output rtag_t         rd_tag,
  input  logic [AW-1:0] rd_addr,
  output raw_t          rd_data,
  input  logic          rd_release
);

  raw_t  mem [2][DEPTH];
  rtag_t tag [2];
  logic  full [2];
  logic  wbank, rbank;
  logic [AW-1:0] waddr;

  assign wr_ready = !full[wbank];
  assign rd_avail = full[rbank];
  assign rd_tag   = tag[rbank];

  always_ff @(posedge clk) begin
    if (wr_valid && wr_ready) mem[wbank][waddr] <= wr_data;
    rd_data <= mem[rbank][rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full[0] <= 1'b0;
      full[1] <= 1'b0;
      tag[0]  <= '0;
      tag[1]  <= '0;
      wbank   <= 1'b0;
      rbank   <= 1'b0;
      waddr   <= '0;
    end else begin
      if (wr_valid && wr_ready) begin
        if (waddr == '0) tag[wbank] <= wr_tag;
        if (waddr == AW'(DEPTH-1)) begin
          waddr       <= '0;
          full[wbank] <= 1'b1;
          wbank       <= !wbank;
        end else begin
          waddr <= waddr + 1'b1;
        end
      end
      if (rd_release && full[rbank]) begin
        full[rbank] <= 1'b0;
        rbank       <= !rbank;
      end
    end
  end

endmodule
