// tb_hdc_fpga_top: end-to-end test of the encoder + learner at its default
// sizes (D=10000, P=5, R=64, N=13 numeric and S=26 categorical features,
// K=5 hashes, OR combining, batch of 32).
//
// The testbench loads a random 8-bit projection matrix, clears the model and
// streams NIN random inputs back to back (in_valid held high), a few of them
// prediction-only. A reference model written here recomputes each input's
// categorical Bloom-filter code (Murmur3 + bucket), numeric threshold code,
// their OR, the dot product with its own copy of theta, the PLAN sigmoid and
// the mini-batch update with saturation; each result on the output stream is
// compared with it, and at the end every theta coordinate is read back.
// Mechanisms counted (each must happen at least once): back-pressure on the
// input (in_ready low while in_valid high), encoder stall waiting for the
// learner, a mini-batch update, a prediction-only input, a coordinate set by
// both encoders (the OR merge), a coordinate in a partly used last chunk set,
// and a second clear. Timing: the steady-state interval between results must
// not exceed 86 cycles, the per-input time of the OR design at 130 MHz and
// 1.51 M inputs/s, and must equal the learner's 2*NCH + 8 cycles.
module tb_hdc_fpga_top;
  import hdc_pkg::*;
  import hdc_ref_pkg::*;

  localparam int D = 10000, P = 5, R = 64, N = 13, S = 26, K = 5;
  localparam int PW = 8, XW = 16, TW = 16, FR = 10, B = 32, LS = 7;
  localparam int DP = D / P, NCH = (DP + R - 1) / R;
  localparam int ZW = XW + PW + $clog2(N + 1);
  localparam int NIN = 70;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [31:0]          seeds [K];
  logic [ZW-1:0]        thr;
  logic                 phi_we, clear;
  logic [$clog2(D)-1:0] phi_row, theta_rd_idx;
  logic [N*PW-1:0]      phi_data;
  logic                 in_valid, in_ready, in_y, in_learn;
  logic [31:0]          in_sym [S];
  logic signed [XW-1:0] in_x [N];
  logic                 out_valid, out_y, idle;
  logic signed [39:0]   out_dot;
  logic [FR:0]          out_prob;
  logic signed [TW-1:0] theta_rd_data;
  logic [4:0]           batch_pos;
  logic [31:0]          n_inputs, n_batches, n_stall_cycles;

  hdc_fpga_top dut (.*);

  int checks = 0, failures = 0;
  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endfunction

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- reference model ----------------
  byte    phi [D][N];
  longint th [D], g [D];
  int     nb_in_batch = 0;

  typedef struct {
    logic [31:0] sym [S];
    logic signed [XW-1:0] x [N];
    bit y, learn;
  } input_t;
  input_t stim [NIN];

  longint exp_dot [NIN], exp_prob [NIN];
  int ev_both = 0, ev_partial = 0, ev_batches = 0, ev_predict = 0;

  task automatic model(int k);
    bit e [D];
    longint d = 0, sg, er;
    for (int i = 0; i < D; i++) e[i] = 0;
    for (int a = 0; a < S; a++)
      for (int pp = 0; pp < P; pp++)
        e[pp * DP + bucket(mm3_word(stim[k].sym[a], seeds[pp]), DP)] = 1;
    for (int i = 0; i < D; i++) begin
      longint z = 0;
      for (int f = 0; f < N; f++) z += longint'(phi[i][f]) * longint'(stim[k].x[f]);
      if (z < 0) z = -z;
      if (z >= longint'(thr)) begin
        if (e[i]) ev_both++;
        e[i] = 1;
      end
      if (e[i] && (i % DP) >= (NCH - 1) * R) ev_partial++;
    end
    for (int i = 0; i < D; i++) if (e[i]) d += th[i];
    sg = sigmoid_fx(d, FR);
    er = (stim[k].y ? (longint'(1) << FR) : 0) - sg;
    exp_dot[k] = d; exp_prob[k] = sg;
    if (!stim[k].learn) begin ev_predict++; return; end
    for (int i = 0; i < D; i++) if (e[i]) g[i] += er;
    nb_in_batch++;
    if (nb_in_batch == B) begin
      for (int i = 0; i < D; i++) begin
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
    for (int i = 0; i < D; i++) begin
      @(negedge clk); theta_rd_idx = $clog2(D)'(i);
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
      th[i] = 0; g[i] = 0;
      for (int f = 0; f < N; f++) phi[i][f] = byte'($urandom);
    end
    for (int k = 0; k < NIN; k++) begin
      foreach (stim[k].sym[a]) stim[k].sym[a] = $urandom;
      foreach (stim[k].x[f]) stim[k].x[f] = XW'($urandom);
      stim[k].y = 1'($urandom % 4 == 0);
      stim[k].learn = !(k % 9 == 8);
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
    for (int i = 0; i < D; i++) if (th[i] != 0) nz++;
    check(nz > 0, "model never changed");
    // a second clear zeroes the model
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    while (!idle) @(negedge clk);
    for (int i = 0; i < D; i++) begin th[i] = 0; g[i] = 0; end
    read_all_theta("after second clear");
    check(nout == NIN, "no result may come from a clear");
    // timing and mechanisms
    $display("max result interval %0d cycles (%0d at 2*NCH+8), stall cycles %0d, back-pressure cycles %0d",
             max_gap, gap_hits, n_stall_cycles, bp_cycles);
    $display("events: batches=%0d predict=%0d both-set=%0d partial-chunk=%0d",
             ev_batches, ev_predict, ev_both, ev_partial);
    check(max_gap <= 86, "result interval above the paper's 86 cycles per input");
    check(gap_hits > 0, "steady-state interval never equal to 2*NCH+8");
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
