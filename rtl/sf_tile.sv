// sf_tile: one SquiggleFilter tile.
//
// A tile classifies one read prefix at a time against the reference genome it
// holds.  Three stages run concurrently on consecutive reads:
//   1. loading: raw samples of a read prefix are written into the free bank of
//      the ping-pong query buffer;
//   2. normalising: the normaliser turns a full bank into N_PE 8-bit samples
//      and shifts them into the PE query chain;
//   3. classifying: the chain is copied into the PEs in one cycle (load), the
//      reference is streamed through the array once, the last PE's costs go to
//      the classifier, and the decision is posted on the result port.
// Classifying a read takes ref_len + N_PE + 4 cycles, which with a 60 000
// sample reference hides the roughly 3 * N_PE cycles of normalisation.
//
// Multi-stage filtering: a query tagged save streams every last-row cost (and
// its bonus) out on iscore_out; a later query of the same read tagged cont
// takes those values back on iscore_in as the boundary row of PE[0], so that
// query lengths that are multiples of N_PE behave like one long array.  Either
// stream can stall the whole array through its handshake.
//
// Interface:
//   ref_we/ref_waddr/ref_wdata  reference buffer write (initialisation)
//   ref_len, threshold          configuration, stable while reads are in flight
//   q_*                         raw samples, valid/ready, tag with the first
//   iscore_in_*                 intermediate scores in, valid/ready, column order
//   iscore_out_*                intermediate scores out, valid/ready
//   cur_tag                     tag of the read being classified (identifies
//                               which stored scores iscore_in must carry)
//   res_*                       decision, valid/ready
// iscore_out_valid depends on iscore_in_valid and iscore_in_ready on
// iscore_out_ready (both streams move together with the array), never on
// their own partner signal.
//
// Follows the paper: the parts and data flow of its tile figure, ping-pong
// query buffers, a per-tile reference buffer with one read port, costs written
// out every cycle for multi-stage filtering, a threshold compare in the last
// PE.  Own choices: the handshakes, the tags, the controller and the stall.
module sf_tile
  import sf_pkg::*;
#(
  parameter int unsigned N_PE      = DEF_N_PE,
  parameter int unsigned REF_DEPTH = DEF_REF_DEPTH,
  parameter int unsigned BONUS     = DEF_BONUS,
  parameter int unsigned MAX_BONUS = DEF_MAX_BONUS,
  localparam int unsigned RAW_AW = $clog2(REF_DEPTH),
  localparam int unsigned LEN_W  = $clog2(REF_DEPTH + 1),
  localparam int unsigned QAW    = $clog2(N_PE)
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic              ref_we,
  input  logic [RAW_AW-1:0] ref_waddr,
  input  samp_t             ref_wdata,
  input  logic [LEN_W-1:0]  ref_len,
  input  cost_t             threshold,
  // raw query samples
  input  logic              q_valid,
  output logic              q_ready,
  input  raw_t              q_data,
  input  rtag_t             q_tag,
  // intermediate scores
  input  logic              iscore_in_valid,
  output logic              iscore_in_ready,
  input  iscore_t           iscore_in,
  output logic              iscore_out_valid,
  input  logic              iscore_out_ready,
  output iscore_t           iscore_out,
  output rtag_t             cur_tag,
  // decision
  output logic              res_valid,
  input  logic              res_ready,
  output result_t           res,
  output logic              busy
);

  // ---------------- query buffer and normaliser ----------------
  logic           qb_avail, qb_release;
  rtag_t          qb_tag;
  logic [QAW-1:0] qb_addr;
  raw_t           qb_data;

  sf_query_buffer #(.DEPTH(N_PE)) u_qbuf (
    .clk       (clk),
    .rst_n     (rst_n),
    .wr_valid  (q_valid),
    .wr_ready  (q_ready),
    .wr_data   (q_data),
    .wr_tag    (q_tag),
    .rd_avail  (qb_avail),
    .rd_tag    (qb_tag),
    .rd_addr   (qb_addr),
    .rd_data   (qb_data),
    .rd_release(qb_release)
  );

  logic  chain_full;
  rtag_t chain_tag;
  logic  n_valid, n_last;
  samp_t n_data;
  rtag_t n_tag;

  sf_normalizer #(.N(N_PE)) u_norm (
    .clk       (clk),
    .rst_n     (rst_n),
    .rd_avail  (qb_avail),
    .rd_tag    (qb_tag),
    .rd_addr   (qb_addr),
    .rd_data   (qb_data),
    .rd_release(qb_release),
    .out_ready (!chain_full),
    .out_valid (n_valid),
    .out_data  (n_data),
    .out_last  (n_last),
    .out_tag   (n_tag)
  );

  // ---------------- controller ----------------
  typedef enum logic [1:0] {C_IDLE, C_STREAM, C_DRAIN, C_POST} cstate_t;
  cstate_t cstate;

  logic              load;
  logic              en, in_ok, out_ok;
  logic [RAW_AW-1:0] raddr;
  logic [LEN_W-1:0]  issued;
  logic              re;
  samp_t             rdata;
  logic              rdata_v;
  logic              cls_start, cls_done, cls_eject;
  cost_t             cls_min;
  iscore_t           a_out;
  logic              a_out_v;
  logic              cls_virus;

  assign in_ok  = !(rdata_v && cur_tag.cont && !iscore_in_valid);
  assign out_ok = !(a_out_v && cur_tag.save && !iscore_out_ready);
  assign en     = in_ok && out_ok;

  assign iscore_in_ready  = rdata_v && cur_tag.cont && out_ok;
  assign iscore_out_valid = a_out_v && cur_tag.save && in_ok;
  assign iscore_out       = a_out;

  assign re = en && (cstate == C_STREAM) && (issued != ref_len);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cstate     <= C_IDLE;
      chain_full <= 1'b0;
      chain_tag  <= '0;
      cur_tag    <= '0;
      load       <= 1'b0;
      cls_start  <= 1'b0;
      raddr      <= '0;
      issued     <= '0;
      rdata_v    <= 1'b0;
      res_valid  <= 1'b0;
      res        <= '0;
    end else begin
      load      <= 1'b0;
      cls_start <= 1'b0;
      if (n_valid && n_last) begin
        chain_full <= 1'b1;
        chain_tag  <= n_tag;
      end
      if (res_valid && res_ready) res_valid <= 1'b0;
      if (en) rdata_v <= re;

      unique case (cstate)
        C_IDLE: if (chain_full && !load) begin
          load       <= 1'b1;
          cls_start  <= 1'b1;
          chain_full <= 1'b0;
          cur_tag    <= chain_tag;
          raddr      <= '0;
          issued     <= '0;
          cstate     <= C_STREAM;
        end
        C_STREAM: if (re) begin
          raddr  <= raddr + 1'b1;
          issued <= issued + 1'b1;
          if (issued + 1'b1 == ref_len) cstate <= C_DRAIN;
        end
        C_DRAIN: if (cls_done) cstate <= C_POST;
        C_POST: if (!res_valid) begin
          res_valid    <= 1'b1;
          res.id       <= cur_tag.id;
          res.eject    <= cls_eject;
          res.min_cost <= cls_min;
          cstate       <= C_IDLE;
        end
        default: cstate <= C_IDLE;
      endcase
    end
  end

  assign busy = (cstate != C_IDLE) || chain_full || qb_avail;

  // ---------------- reference buffer, array, classifier ----------------
  sf_ref_buffer #(.DEPTH(REF_DEPTH)) u_ref (
    .clk  (clk),
    .we   (ref_we),
    .waddr(ref_waddr),
    .wdata(ref_wdata),
    .re   (re),
    .raddr(raddr),
    .rdata(rdata)
  );

  sf_pe_array #(.N_PE(N_PE), .BONUS(BONUS), .MAX_BONUS(MAX_BONUS)) u_array (
    .clk         (clk),
    .rst_n       (rst_n),
    .en          (en),
    .shift_en    (n_valid),
    .load        (load),
    .q_in        (n_data),
    .cont        (cur_tag.cont),
    .ref_in      (rdata),
    .ref_v_in    (rdata_v),
    .iscore_in   (iscore_in),
    .iscore_out  (a_out),
    .iscore_v_out(a_out_v)
  );

  sf_classifier #(.REF_DEPTH(REF_DEPTH)) u_cls (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (cls_start),
    .ref_len  (ref_len),
    .threshold(threshold),
    .cost_v   (a_out_v && en),
    .cost     (a_out.cost),
    .is_virus (cls_virus),
    .done     (cls_done),
    .eject    (cls_eject),
    .min_cost (cls_min)
  );

  // the reference read port must not be asked for more than ref_len samples
  assert property (@(posedge clk) disable iff (!rst_n) re |-> issued < ref_len);
  // a new query may only be loaded into a free chain
  assert property (@(posedge clk) disable iff (!rst_n) n_valid |-> !chain_full);

endmodule
