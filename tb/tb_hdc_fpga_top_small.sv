// tb_hdc_fpga_top_small: end-to-end test of the encoder + learner in SUM
// combining mode at reduced sizes (D=200, P=5, R=8, N=13, S=8, K=5, batch of
// 4, learning-rate shift 3), so that it builds and runs in seconds.
//
// Same structure as the full-size test: a reference model written here
// recomputes every input's categorical code (now as counts), the numeric
// threshold code, their sum, the dot product, PLAN sigmoid and mini-batch
// update; each streamed result and, at the end, all of theta are compared.
// Mechanisms counted (each must happen at least once): input back-pressure,
// encoder stall on the learner, mini-batch updates, prediction-only inputs,
// a coordinate where both encoders contribute (sum of 2 or more), a
// categorical count of 2 or more (hash collision), a set coordinate in a
// partly used last chunk, and a second clear. The steady-state interval
// between results (most gaps; a prediction-only input lets the encoder
// briefly set the pace) must equal the learner's 2*NCH + 8 cycles.
module tb_hdc_fpga_top_small;
  import hdc_pkg::*;
  import hdc_ref_pkg::*;

  localparam int D = 200, P = 5, R = 8, N = 13, S = 8, K = 5;
  localparam int PW = 8, XW = 16, TW = 16, FR = 10, B = 4, LS = 3;
  localparam int DP = D / P, NCH = (DP + R - 1) / R;
  localparam int ZW = XW + PW + $clog2(N + 1);
  localparam int NIN = 60;
  localparam combine_e MODE = CMB_SUM;
  localparam int ED = (MODE == CMB_CONCAT) ? 2 * D : D;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [31:0]          seeds [K];
  logic [ZW-1:0]        thr;
  logic                 phi_we, clear;
  logic [$clog2(D)-1:0] phi_row;
  logic [$clog2(ED)-1:0] theta_rd_idx;
  logic [N*PW-1:0]      phi_data;
  logic                 in_valid, in_ready, in_y, in_learn;
  logic [31:0]          in_sym [S];
  logic signed [XW-1:0] in_x [N];
  logic                 out_valid, out_y, idle;
  logic signed [39:0]   out_dot;
  logic [FR:0]          out_prob;
  logic signed [TW-1:0] theta_rd_data;
  logic [1:0]           batch_pos;
  logic [31:0]          n_inputs, n_batches, n_stall_cycles;

  hdc_fpga_top #(.D(D), .P(P), .R(R), .N(N), .S(S), .K(K), .MODE(MODE),
                .BATCH(B), .LR_SHIFT(LS)) dut (.*);

  int checks = 0, failures = 0;
  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endfunction

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- reference model ----------------
  byte    phi [D][N];
  longint th [ED], g [ED];
  int     nb_in_batch = 0;

  typedef struct {
    logic [31:0] sym [S];
    logic signed [XW-1:0] x [N];
    bit y, learn;
  } input_t;
  input_t stim [NIN];

  longint exp_dot [NIN], exp_prob [NIN];
  int ev_coll = 0, ev_both = 0, ev_partial = 0, ev_batches = 0, ev_predict = 0;

  task automatic model(int k);
    int c [D], e [ED];
    longint d = 0, sg, er;
    for (int i = 0; i < D; i++) c[i] = 0;
    for (int a = 0; a < S; a++)
      for (int pp = 0; pp < P; pp++)
        c[pp * DP + bucket(mm3_word(stim[k].sym[a], seeds[pp]), DP)] += 1;
    for (int i = 0; i < D; i++) if (c[i] >= 2) ev_coll++;
    for (int i = 0; i < ED; i++) e[i] = 0;
    for (int i = 0; i < D; i++) begin
      longint z = 0;
      int nb;
      for (int f = 0; f < N; f++) z += longint'(phi[i][f]) * longint'(stim[k].x[f]);
      if (z < 0) z = -z;
      nb = (z >= longint'(thr)) ? 1 : 0;
      if (nb != 0 && c[i] != 0) ev_both++;
      unique case (MODE)
        CMB_SUM:     e[i] = c[i] + nb;
        CMB_OR:      e[i] = (c[i] != 0 || nb != 0) ? 1 : 0;
        CMB_NOCOUNT: e[i] = (c[i] != 0) ? 1 : 0;
        default: begin e[i] = nb; e[D + i] = (c[i] != 0) ? 1 : 0; end
      endcase
    end
    for (int i = 0; i < ED; i++)
      if (e[i] != 0 && (i % DP) >= (NCH - 1) * R) ev_partial++;
    for (int i = 0; i < ED; i++) d += th[i] * longint'(e[i]);
    sg = sigmoid_fx(d, FR);
    er = (stim[k].y ? (longint'(1) << FR) : 0) - sg;
    exp_dot[k] = d; exp_prob[k] = sg;
    if (!stim[k].learn) begin ev_predict++; return; end
    for (int i = 0; i < ED; i++) g[i] += er * longint'(e[i]);
    nb_in_batch++;
    if (nb_in_batch == B) begin
      for (int i = 0; i < ED; i++) begin
        longint t = th[i] + (g[i] >>> LS);
        if (t > 32767) t = 32767;
        if (t < -32768) t = -32768;
        th[i] = t; g[i] = 0;
      end
      nb_in_batch = 0;
      ev_batches++;
    end
  endtask

  // ---------------- result checking ----------------
  int nout = 0, last_out = -1, max_gap = 0, gap_hits = 0;
  int bp_cycles = 0;
  always @(posedge clk) begin
    if (rst_n && in_valid && !in_ready) bp_cycles++;
    if (rst_n && out_valid) begin
      if (nout < NIN) begin
        check(out_dot == 40'(exp_dot[nout]),
              $sformatf("input %0d: dot %0d, expected %0d", nout, out_dot, exp_dot[nout]));
        check(longint'(out_prob) == exp_prob[nout],
              $sformatf("input %0d: prob %0d, expected %0d", nout, out_prob, exp_prob[nout]));
        check(out_y == stim[nout].y, "label travels with its input");
      end
      if (last_out >= 0 && nout >= 2) begin
        if (cyc - last_out > max_gap) max_gap = cyc - last_out;
        if (cyc - last_out == 2 * NCH + 8) gap_hits++;
      end
      last_out = cyc;
      nout++;
    end
  end

  task automatic read_all_theta(string when);
    int bad = 0;
    for (int i = 0; i < ED; i++) begin
      @(negedge clk); theta_rd_idx = $clog2(ED)'(i);
      @(negedge clk); @(negedge clk);
      if (longint'(theta_rd_data) != th[i]) bad++;
    end
    check(bad == 0, $sformatf("%s: %0d theta coordinates differ", when, bad));
  endtask

  initial begin
    int nz;
    phi_we = 0; phi_row = 0; phi_data = 0; clear = 0; theta_rd_idx = 0;
    in_valid = 0; in_y = 0; in_learn = 0;
    foreach (in_sym[i]) in_sym[i] = 0;
    foreach (in_x[i]) in_x[i] = 0;
    foreach (seeds[i]) seeds[i] = $urandom;
    thr = ZW'(7_000_000);
    for (int i = 0; i < D; i++) begin
      for (int f = 0; f < N; f++) phi[i][f] = byte'($urandom);
    end
    for (int i = 0; i < ED; i++) begin th[i] = 0; g[i] = 0; end
    for (int k = 0; k < NIN; k++) begin
      foreach (stim[k].sym[a]) stim[k].sym[a] = $urandom;
      foreach (stim[k].x[f]) stim[k].x[f] = XW'($urandom);
      stim[k].y = 1'($urandom % 4 == 0);
      stim[k].learn = !(k % 7 == 6);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // load Phi
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      phi_we = 1; phi_row = $clog2(D)'(i);
      for (int f = 0; f < N; f++) phi_data[f*PW +: PW] = phi[i][f];
    end
    @(negedge clk); phi_we = 0;
    // clear the model
    clear = 1;
    @(negedge clk); clear = 0;
    while (!idle) @(negedge clk);
    @(negedge clk);
    // reference results, then stream the inputs
    for (int k = 0; k < NIN; k++) model(k);
    for (int k = 0; k < NIN; k++) begin
      in_valid = 1; in_sym = stim[k].sym; in_x = stim[k].x;
      in_y = stim[k].y; in_learn = stim[k].learn;
      while (!in_ready) @(negedge clk);   // taken at the next rising edge
      @(negedge clk);
    end
    in_valid = 0;
    while (nout < NIN) @(posedge clk);
    @(negedge clk);
    while (!idle) @(negedge clk);
    check(int'(n_inputs) == NIN, "input counter");
    check(int'(n_batches) == ev_batches, "batch counter");
    read_all_theta("end of stream");
    nz = 0;
    for (int i = 0; i < ED; i++) if (th[i] != 0) nz++;
    check(nz > 0, "model never changed");
    // a second clear zeroes the model
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    while (!idle) @(negedge clk);
    for (int i = 0; i < ED; i++) begin th[i] = 0; g[i] = 0; end
    read_all_theta("after second clear");
    check(nout == NIN, "no result may come from a clear");
    // timing and mechanisms
    $display("max result interval %0d cycles (%0d at 2*NCH+8), stall cycles %0d, back-pressure cycles %0d",
             max_gap, gap_hits, n_stall_cycles, bp_cycles);
    $display("events: collisions=%0d batches=%0d predict=%0d both-set=%0d partial-chunk=%0d",
             ev_coll, ev_batches, ev_predict, ev_both, ev_partial);
    check(gap_hits > NIN / 2, "steady-state result interval is not 2*NCH+8");
    check(ev_coll > 0, "no categorical hash collision");
    check(n_stall_cycles > 0, "encoder never stalled on the learner");
    check(bp_cycles > 0, "input back-pressure never happened");
    check(ev_batches > 0, "no mini-batch update");
    check(ev_predict > 0, "no prediction-only input");
    check(ev_both > 0, "no coordinate set by both encoders");
    check(ev_partial > 0, "no coordinate of a partial chunk set");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
