// tb_lr_update: self-checking testbench of the logistic-regression learner.
//
// A small configuration (D=40, P=2, R=6: the last chunk of each partition is
// only partly used) with 2-bit embeddings, a batch of 3, 8-bit theta with 6
// fractional bits and learning-rate shift 0, so that theta saturates within
// the first batches. A reference model here keeps theta and the gradient as
// integers and repeats the arithmetic (dot product, PLAN sigmoid, error,
// batch update with saturation). After every input the dot product and
// probability are compared, and after every batch all of theta is read back
// through the read port. Prediction-only inputs (learn = 0) must leave theta
// and the batch count alone. Cycle counts (edges from the one that samples
// start to the first that sees done) are checked: 2*NCH + 7 when
// learning, NCH + 5 when predicting, NCH + 2 for clear.
module tb_lr_update;
  import hdc_ref_pkg::*;
  localparam int D = 40, P = 2, R = 6, EW = 2, TW = 8, FR = 6, B = 3, LS = 0;
  localparam int DP = D / P, NCH = (DP + R - 1) / R;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic clear, start, learn, y, busy, done, batch_applied;
  logic [EW-1:0] emb [D];
  logic signed [39:0] dot;
  logic [FR:0] prob;
  logic [1:0] batch_cnt;
  logic [$clog2(D)-1:0] theta_rd_idx;
  logic signed [TW-1:0] theta_rd_data;

  lr_update #(.D(D), .P(P), .R(R), .EMB_W(EW), .TH_W(TW), .FRAC(FR),
              .BATCH(B), .LR_SHIFT(LS)) dut (.*);

  int checks = 0, failures = 0;
  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endfunction

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  longint th [D], g [D];
  int nbatch = 0, nsat = 0, cnt = 0;

  task automatic read_theta(string when);
    int bad = 0;
    for (int i = 0; i < D; i++) begin
      @(negedge clk); theta_rd_idx = $clog2(D)'(i);
      @(negedge clk); @(negedge clk);
      if (longint'(theta_rd_data) != th[i]) bad++;
    end
    check(bad == 0, $sformatf("%s: %0d theta values differ", when, bad));
  endtask

  task automatic one_input(bit lrn);
    longint d = 0, sg, e;
    int t0;
    bit yy = 1'($urandom);
    for (int i = 0; i < D; i++) begin
      emb[i] = ($urandom % 2 == 0) ? EW'($urandom) : '0;
      d += th[i] * longint'(emb[i]);
    end
    sg = sigmoid_fx(d, FR);
    e  = (yy ? (longint'(1) << FR) : 0) - sg;
    @(negedge clk); start = 1; learn = lrn; y = yy;
    @(posedge clk); t0 = cyc;
    @(negedge clk); start = 0;
    while (!done) @(posedge clk);
    check(cyc - t0 == (lrn ? 2 * NCH + 7 : NCH + 5),
          $sformatf("latency %0d (learn=%0d)", cyc - t0, lrn));
    @(negedge clk);
    check(dot == 40'(d), $sformatf("dot %0d, expected %0d", dot, d));
    check(longint'(prob) == sg, $sformatf("prob %0d, expected %0d", prob, sg));
    if (lrn) begin
      for (int i = 0; i < D; i++) g[i] += e * longint'(emb[i]);
      cnt++;
      check(batch_applied == 0, "batch_applied is a pulse");
      if (cnt == B) begin
        for (int i = 0; i < D; i++) begin
          longint t = th[i] + (g[i] >>> LS);
          if (t > 127) begin t = 127; nsat++; end
          if (t < -128) begin t = -128; nsat++; end
          th[i] = t; g[i] = 0;
        end
        cnt = 0; nbatch++;
        read_theta($sformatf("batch %0d", nbatch));
      end
    end
    check(int'(batch_cnt) == cnt, "batch count");
  endtask

  initial begin
    int t0;
    clear = 0; start = 0; learn = 0; y = 0; theta_rd_idx = 0;
    foreach (emb[i]) emb[i] = 0;
    for (int i = 0; i < D; i++) begin th[i] = 0; g[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); clear = 1;
    @(posedge clk); t0 = cyc;
    @(negedge clk); clear = 0;
    while (!done) @(posedge clk);
    check(cyc - t0 == NCH + 2, $sformatf("clear took %0d", cyc - t0));
    read_theta("after clear");
    for (int k = 0; k < 40; k++) one_input(k % 5 != 4);
    check(nbatch >= 5, "too few batches");
    check(nsat > 0, "saturation never exercised");
    // clear again: theta back to zero, batch restarts
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    while (busy) @(posedge clk);
    for (int i = 0; i < D; i++) begin th[i] = 0; g[i] = 0; end
    cnt = 0;
    read_theta("after second clear");
    one_input(1'b1);
    $display("batches=%0d saturations=%0d", nbatch, nsat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
