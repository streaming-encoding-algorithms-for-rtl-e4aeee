// hdc_fpga_top: streaming hyperdimensional encoder and logistic-regression
// learner for inputs that mix numeric and high-cardinality categorical data.
//
// Each input carries N numeric features x_n, S categorical symbols x_c and a
// binary label y. Two encoders run concurrently on it:
//   * cat_encoder: Bloom-filter hash encoding of x_c (K Murmur3 hashes per
//     symbol spread over P partitions), no codebook stored;
//   * num_encoder: thresholded random projection |Phi x_n| >= thr.
// When both are done, embed_combiner merges the two D-dimensional embeddings
// (OR, SUM, categorical-only or concatenation, set by MODE) into its hand-off
// register and
// lr_update performs one mini-batch SGD step of logistic regression on it
// (or only predicts when learn = 0). The stages form a producer-consumer
// pipeline: the encoders take the next input as soon as the hand-off
// register has been loaded, and wait (stall) while the learner is still busy
// with the previous input. The block structure, partitioning and sizes follow
// the paper's FPGA design; the handshakes, the one-deep hand-off buffer and
// all number formats are this design's own.
//
// Interfaces (all synchronous to clk, active-low asynchronous reset):
//   configuration, while idle: seeds[K] (hash seeds), thr (numeric
//     threshold), the Phi row-load port, clear (zero theta, restart batch);
//   input stream: in_valid/in_ready handshake with in_sym, in_x, in_y,
//     in_learn; an input is taken when both are high at a clock edge;
//   result stream: out_valid pulses once per input, in order, with the
//     model's dot product and probability computed before the update;
//   theta read-back port and counters of inputs, batches and stall cycles.
// Latency of one input from acceptance to out_valid, at the defaults:
// about 34 cycles of encoding, 1 cycle of hand-off and 70 of learning;
// in steady state one input completes every 72 cycles (the learner's rate).
module hdc_fpga_top
  import hdc_pkg::*;
#(
  parameter int unsigned D        = 10000,  // encoding dimension
  parameter int unsigned P        = 5,      // partitions
  parameter int unsigned R        = 64,     // lanes per partition
  parameter int unsigned N        = 13,     // numeric features
  parameter int unsigned S        = 26,     // categorical features
  parameter int unsigned K        = 5,      // hash functions
  parameter combine_e    MODE     = CMB_OR,
  parameter int unsigned PHI_W    = 8,
  parameter int unsigned X_W      = 16,
  parameter int unsigned TH_W     = 16,
  parameter int unsigned FRAC     = 10,
  parameter int unsigned BATCH    = 32,
  parameter int unsigned LR_SHIFT = 7,
  localparam int unsigned CNT_W   = (MODE == CMB_SUM) ? $clog2(S * (K / P) + 1) : 1,
  localparam int unsigned EMB_W   = (MODE == CMB_SUM) ? CNT_W + 1 : 1,
  localparam int unsigned Z_W     = X_W + PHI_W + $clog2(N + 1),
  localparam int unsigned IDX_W   = $clog2(D),
  // concatenation: the learner sees 2D coordinates in 2P partitions, so the
  // numeric and categorical halves are processed in parallel
  localparam int unsigned ED      = (MODE == CMB_CONCAT) ? 2 * D : D,
  localparam int unsigned LP      = (MODE == CMB_CONCAT) ? 2 * P : P,
  localparam int unsigned TIDX_W  = $clog2(ED),
  localparam int unsigned BW      = (BATCH > 1) ? $clog2(BATCH) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // configuration
  input  logic [31:0]             seeds [K],
  input  logic [Z_W-1:0]          thr,
  input  logic                    phi_we,
  input  logic [IDX_W-1:0]        phi_row,
  input  logic [N*PHI_W-1:0]      phi_data,
  input  logic                    clear,
  // input stream
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [31:0]             in_sym [S],
  input  logic signed [X_W-1:0]   in_x   [N],
  input  logic                    in_y,
  input  logic                    in_learn,
  // result stream
  output logic                    out_valid,
  output logic signed [39:0]      out_dot,
  output logic [FRAC:0]           out_prob,
  output logic                    out_y,
  // model read-back and status
  input  logic [TIDX_W-1:0]       theta_rd_idx,
  output logic signed [TH_W-1:0]  theta_rd_data,
  output logic                    idle,
  output logic [BW-1:0]           batch_pos,      // inputs so far in the current batch
  output logic [31:0]             n_inputs,
  output logic [31:0]             n_batches,
  output logic [31:0]             n_stall_cycles
);

  // ---------------- encoders ----------------
  logic             enc_start;
  logic             cat_busy, cat_done, num_busy, num_done;
  logic             cat_fin, num_fin;          // done seen for the current input
  logic             enc_active;                // an input is being encoded
  logic             enc_y, enc_learn;
  logic [CNT_W-1:0] vec_c [D];
  logic             vec_n [D];

  cat_encoder #(.D(D), .P(P), .K(K), .S(S),
                .COUNT(MODE == CMB_SUM), .CNT_W(CNT_W)) u_cat (
    .clk, .rst_n, .start(enc_start), .symbols(in_sym), .seeds(seeds),
    .busy(cat_busy), .done(cat_done), .vec(vec_c));

  num_encoder #(.D(D), .P(P), .R(R), .N(N), .PHI_W(PHI_W), .X_W(X_W)) u_num (
    .clk, .rst_n, .phi_we, .phi_row, .phi_data,
    .start(enc_start), .x(in_x), .thr(thr),
    .busy(num_busy), .done(num_done), .vec(vec_n));

  // ---------------- hand-off and learner ----------------
  logic             upd_busy, upd_done, upd_start, upd_clear;
  logic             enc_full;                  // both encodings complete
  logic             handoff;
  logic             upd_y, upd_learn;
  logic [EMB_W-1:0] emb [ED];
  logic             batch_applied;
  logic signed [39:0] dot;
  logic [FRAC:0]    prob;

  embed_combiner #(.D(D), .MODE(MODE), .CNT_W(CNT_W), .EMB_W(EMB_W)) u_comb (
    .clk, .rst_n, .load(handoff), .vec_c(vec_c), .vec_n(vec_n), .emb(emb));

  lr_update #(.D(ED), .P(LP), .R(R), .EMB_W(EMB_W), .TH_W(TH_W), .FRAC(FRAC),
              .BATCH(BATCH), .LR_SHIFT(LR_SHIFT)) u_upd (
    .clk, .rst_n, .clear(upd_clear), .start(upd_start), .learn(upd_learn),
    .y(upd_y), .emb(emb), .busy(upd_busy), .done(upd_done), .dot(dot),
    .prob(prob), .batch_cnt(batch_pos), .batch_applied(batch_applied),
    .theta_rd_idx, .theta_rd_data);

  // the learner's done after a clear is not a result
  logic clearing;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) clearing <= 1'b0;
    else if (upd_clear) clearing <= 1'b1;
    else if (upd_done) clearing <= 1'b0;
  end

  // learner free: not busy and no start pending
  logic upd_free;
  assign upd_free  = !upd_busy && !upd_start;
  assign in_ready  = !enc_active && !clear && !upd_clear;
  assign enc_start = in_valid && in_ready;
  assign enc_full  = enc_active && cat_fin && num_fin;
  assign handoff   = enc_full && upd_free;
  assign upd_clear = clear && idle;
  assign idle      = !enc_active && upd_free;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      enc_active     <= 1'b0;
      cat_fin        <= 1'b0;
      num_fin        <= 1'b0;
      enc_y          <= 1'b0;
      enc_learn      <= 1'b0;
      upd_start      <= 1'b0;
      upd_y          <= 1'b0;
      upd_learn      <= 1'b0;
      out_valid      <= 1'b0;
      out_dot        <= '0;
      out_prob       <= '0;
      out_y          <= 1'b0;
      n_inputs       <= '0;
      n_batches      <= '0;
      n_stall_cycles <= '0;
    end else begin
      upd_start <= 1'b0;
      out_valid <= 1'b0;
      if (enc_start) begin
        enc_active <= 1'b1;
        cat_fin    <= 1'b0;
        num_fin    <= 1'b0;
        enc_y      <= in_y;
        enc_learn  <= in_learn;
      end else begin
        if (cat_done) cat_fin <= 1'b1;
        if (num_done) num_fin <= 1'b1;
        if (handoff) enc_active <= 1'b0;
      end
      if (enc_full && !upd_free)
        n_stall_cycles <= n_stall_cycles + 1'b1;
      if (handoff) begin
        upd_start <= 1'b1;            // emb is valid from the next cycle
        upd_y     <= enc_y;
        upd_learn <= enc_learn;
      end
      if (upd_done && !clearing) begin
        out_valid <= 1'b1;
        out_dot   <= dot;
        out_prob  <= prob;
        out_y     <= upd_y;
        n_inputs  <= n_inputs + 1'b1;
        if (batch_applied) n_batches <= n_batches + 1'b1;
      end
    end
  end

  // handshake rules
  a_no_start_busy: assert property (@(posedge clk)
    enc_start |-> !cat_busy && !num_busy);
  a_handoff_free: assert property (@(posedge clk)
    handoff |-> !upd_busy);

endmodule
