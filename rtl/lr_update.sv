// lr_update: logistic-regression learner on HD embeddings, trained by
// mini-batch stochastic gradient descent.
//
// The model is Pr(y = 1) = sigma(theta . phi) with a D-element parameter
// vector theta. For each input the unit
//   1. computes the dot product theta . phi (DOT pass),
//   2. evaluates the sigmoid and the error e = y - sigma(theta . phi) (SIG),
//   3. adds e * phi to a gradient accumulator g (GRAD pass); on the last
//      input of a mini-batch of BATCH inputs it instead writes
//      theta += (g + e * phi) >>> LR_SHIFT and clears g.
// With learn = 0 only steps 1-2 run (prediction); the probability is always
// returned on prob.
//
// Organisation: theta, g and phi are split the same way as the encoders'
// output, P partitions of D/P coordinates with R lanes each, so P*R
// coordinates are processed per cycle in NCH = ceil(D/P/R) chunks. Lane
// (pp, j) owns coordinates pp*D/P + c*R + j. theta and g live in per-lane
// memories of NCH words. For binary embeddings (OR, No-Count) the products
// reduce to selecting theta where phi is one.
//   DOT : read chunk (1), per-partition sums (2), accumulate (3): NCH + 3
//         cycles. GRAD: read (1), update and write (2): NCH + 1 cycles.
//   SIG : one cycle. The PLAN piecewise-linear sigmoid is used.
// done rises 2*NCH + 6 cycles after the edge that samples start when learning
// (70 for the defaults), NCH + 4 when predicting, and NCH + 1 after clear.
//
// Number formats (this design's choice): theta is TH_W-bit two's complement
// with FRAC fractional bits and saturates; sigma and e have FRAC fractional
// bits; g is wide enough never to overflow within a batch. The learning rate
// is 2^-LR_SHIFT per summed gradient. The sizes D, P, R follow the paper; the
// batch size and learning rate are not given there.
//
// Interface: clear (when idle) zeroes theta and g in NCH cycles and restarts
// the batch. start (when idle) samples y and learn; emb must stay stable
// until done. theta can be read back when idle: theta_rd_idx is sampled and
// theta_rd_data is valid two cycles later.
module lr_update
  import hdc_pkg::*;
#(
  parameter int unsigned D        = 10000,
  parameter int unsigned P        = 5,
  parameter int unsigned R        = 64,
  parameter int unsigned EMB_W    = 1,
  parameter int unsigned TH_W     = 16,
  parameter int unsigned FRAC     = 10,
  parameter int unsigned BATCH    = 32,
  parameter int unsigned LR_SHIFT = 7,
  localparam int unsigned IDX_W   = $clog2(D),
  localparam int unsigned BW      = (BATCH > 1) ? $clog2(BATCH) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    start,
  input  logic                    learn,
  input  logic                    y,
  input  logic [EMB_W-1:0]        emb  [D],
  output logic                    busy,
  output logic                    done,
  output logic signed [39:0]      dot,
  output logic [FRAC:0]           prob,
  output logic [BW-1:0]           batch_cnt,
  output logic                    batch_applied,  // pulses with done when theta was written
  input  logic [IDX_W-1:0]        theta_rd_idx,
  output logic signed [TH_W-1:0]  theta_rd_data
);

  localparam int unsigned DP   = D / P;
  localparam int unsigned NCH  = (DP + R - 1) / R;
  localparam int unsigned CW   = (NCH > 1) ? $clog2(NCH) : 1;
  localparam int unsigned L    = P * R;
  localparam int unsigned E_W  = FRAC + 2;                       // error
  localparam int unsigned G_W  = E_W + EMB_W + BW + 2;           // gradient
  localparam int unsigned PS_W = TH_W + EMB_W + $clog2(R + 1) + 1;

  initial assert (D % P == 0) else $error("D must be a multiple of P");

  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_DOT, S_SIG, S_GRAD} state_e;
  state_e state;

  logic [CW:0]   c_cnt;                 // chunk issue counter
  logic          v1, v2;                // pipeline valids
  logic [CW-1:0] c1;                    // chunk of the read stage
  logic          y_q, learn_q, last_q;
  logic signed [E_W-1:0] err;
  logic signed [39:0]    acc;

  // per-lane read registers
  logic signed [TH_W-1:0] th_rd [L];
  logic signed [G_W-1:0]  g_rd  [L];
  logic [EMB_W-1:0]       em_rd [L];
  logic signed [PS_W-1:0] psum  [P];

  wire issuing = (state == S_DOT || state == S_GRAD || state == S_CLEAR) &&
                 (c_cnt < (CW+1)'(NCH));

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      busy          <= 1'b0;
      done          <= 1'b0;
      c_cnt         <= '0;
      v1            <= 1'b0;
      v2            <= 1'b0;
      c1            <= '0;
      y_q           <= 1'b0;
      learn_q       <= 1'b0;
      last_q        <= 1'b0;
      batch_cnt     <= '0;
      batch_applied <= 1'b0;
      err           <= '0;
      prob          <= '0;
      dot           <= '0;
    end else begin
      done          <= 1'b0;
      batch_applied <= 1'b0;
      v1            <= issuing && state != S_CLEAR;
      c1            <= CW'(c_cnt);
      v2            <= v1 && state == S_DOT;
      unique case (state)
        S_IDLE: begin
          if (clear) begin
            state     <= S_CLEAR;
            busy      <= 1'b1;
            c_cnt     <= '0;
            batch_cnt <= '0;
          end else if (start) begin
            state   <= S_DOT;
            busy    <= 1'b1;
            c_cnt   <= '0;
            y_q     <= y;
            learn_q <= learn;
            last_q  <= (batch_cnt == BW'(BATCH - 1));
          end
        end
        S_CLEAR: begin
          if (c_cnt < (CW+1)'(NCH)) c_cnt <= c_cnt + 1'b1;
          else begin
            state <= S_IDLE;
            busy  <= 1'b0;
            done  <= 1'b1;
          end
        end
        S_DOT: begin
          if (c_cnt < (CW+1)'(NCH)) c_cnt <= c_cnt + 1'b1;
          else if (!v1 && !v2) state <= S_SIG;
        end
        S_SIG: begin
          logic signed [31:0] sg;
          sg   = sigmoid_plan(acc, FRAC);
          dot  <= acc;
          prob <= (FRAC+1)'(sg);
          err  <= E_W'((y_q ? (32'sd1 <<< FRAC) : 32'sd0) - sg);
          c_cnt <= '0;
          if (learn_q) state <= S_GRAD;
          else begin
            state <= S_IDLE;
            busy  <= 1'b0;
            done  <= 1'b1;
          end
        end
        S_GRAD: begin
          if (c_cnt < (CW+1)'(NCH)) c_cnt <= c_cnt + 1'b1;
          else if (!v1) begin
            state         <= S_IDLE;
            busy          <= 1'b0;
            done          <= 1'b1;
            batch_applied <= last_q;
            batch_cnt     <= last_q ? '0 : batch_cnt + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // dot-product accumulator (stage 3)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc <= '0;
    else if (state == S_IDLE && start && !clear) acc <= '0;
    else if (v2) begin
      logic signed [39:0] s;
      s = '0;
      for (int pp = 0; pp < int'(P); pp++) s += 40'(psum[pp]);
      acc <= acc + s;
    end
  end

  // host read-back: chunk of the requested index, then its lane
  logic [CW-1:0]  rd_chunk_host;
  logic [$clog2(L+1)-1:0] rd_lane_host, rd_lane_q;
  always_comb begin
    int unsigned pi, off;
    pi  = int'(theta_rd_idx) / DP;
    off = int'(theta_rd_idx) % DP;
    rd_chunk_host = CW'(off / R);
    rd_lane_host  = ($clog2(L+1))'(pi * R + off % R);
  end
  always_ff @(posedge clk) begin
    rd_lane_q     <= rd_lane_host;
    theta_rd_data <= th_rd[rd_lane_q];
  end

  wire [CW-1:0] rd_chunk = (state == S_IDLE) ? rd_chunk_host : CW'(c_cnt);

  // ---------------- lanes ----------------
  for (genvar pp = 0; pp < P; pp++) begin : g_part
    for (genvar j = 0; j < R; j++) begin : g_lane
      localparam int unsigned LN = pp * R + j;
      logic signed [TH_W-1:0] th_mem [NCH];
      logic signed [G_W-1:0]  g_mem  [NCH];

      // embedding word of this lane for chunk c (zero past the partition end)
      logic [EMB_W-1:0] emb_lane [NCH];
      for (genvar c = 0; c < NCH; c++) begin : g_emb
        if (c * R + j < DP) begin : g_used
          assign emb_lane[c] = emb[pp * DP + c * R + j];
        end else begin : g_pad
          assign emb_lane[c] = '0;
        end
      end

      // stage 1: read
      always_ff @(posedge clk) begin
        th_rd[LN] <= th_mem[rd_chunk];
        g_rd[LN]  <= g_mem[rd_chunk];
        em_rd[LN] <= emb_lane[rd_chunk];
      end

      // stage 2 (GRAD): update and write back; CLEAR writes zeros
      always_ff @(posedge clk) begin
        if (state == S_CLEAR && issuing) begin
          th_mem[CW'(c_cnt)] <= '0;
          g_mem[CW'(c_cnt)]  <= '0;
        end else if (state == S_GRAD && v1) begin
          logic signed [G_W-1:0]    g_new;
          logic signed [G_W:0]      t_new;
          g_new = g_rd[LN] + G_W'(err) * G_W'($signed({1'b0, em_rd[LN]}));
          if (last_q) begin
            t_new = (G_W+1)'(th_rd[LN]) + (G_W+1)'(g_new >>> LR_SHIFT);
            if (t_new > (G_W+1)'((2 ** (TH_W - 1)) - 1))
              th_mem[c1] <= TH_W'((2 ** (TH_W - 1)) - 1);
            else if (t_new < -(G_W+1)'(2 ** (TH_W - 1)))
              th_mem[c1] <= TH_W'(-(2 ** (TH_W - 1)));
            else
              th_mem[c1] <= TH_W'(t_new);
            g_mem[c1] <= '0;
          end else begin
            g_mem[c1] <= g_new;
          end
        end
      end
    end

    // stage 2 (DOT): partition sum of theta * phi over its R lanes
    always_ff @(posedge clk) begin
      logic signed [PS_W-1:0] s;
      s = '0;
      for (int j = 0; j < int'(R); j++)
        s += PS_W'(th_rd[pp * R + j]) * PS_W'($signed({1'b0, em_rd[pp * R + j]}));
      psum[pp] <= s;
    end
  end

endmodule
