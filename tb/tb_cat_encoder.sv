// tb_cat_encoder: self-checking testbench of the partitioned hash encoder.
//
// Two instances run side by side on the same symbols:
//   * u_or : the default configuration (D=10000, P=5, K=5, S=26), bit mode;
//   * u_cnt: a tiny counting configuration (D=20, P=5, K=10, S=6, 3-bit
//            counters) in which hash collisions, saturation-free repeated
//            increments and Q=2 hashes per partition all occur.
// Expected vectors are rebuilt from the reference Murmur3 and bucket mapping
// of hdc_ref_pkg. Each of several inputs checks every coordinate, the number
// of set coordinates, and the start-to-done latency (done is first seen high S*Q + 4 clock edges after the edge that takes start).
module tb_cat_encoder;
  import hdc_ref_pkg::*;

  localparam int D1 = 10000, P1 = 5, K1 = 5,  S1 = 26;
  localparam int D2 = 20,    P2 = 5, K2 = 10, S2 = 6, C2 = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        start1, start2;
  logic [31:0] sym1 [S1], seeds1 [K1];
  logic [31:0] sym2 [S2], seeds2 [K2];
  logic        busy1, done1, busy2, done2;
  logic [0:0]  vec1 [D1];
  logic [C2-1:0] vec2 [D2];
  int checks = 0, failures = 0;

  cat_encoder #(.D(D1), .P(P1), .K(K1), .S(S1)) u_or (
    .clk, .rst_n, .start(start1), .symbols(sym1), .seeds(seeds1),
    .busy(busy1), .done(done1), .vec(vec1));

  cat_encoder #(.D(D2), .P(P2), .K(K2), .S(S2), .COUNT(1'b1), .CNT_W(C2)) u_cnt (
    .clk, .rst_n, .start(start2), .symbols(sym2), .seeds(seeds2),
    .busy(busy2), .done(done2), .vec(vec2));

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endfunction

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic run_or(int trial);
    int exp_v [D1];
    int t0, nset_exp, nset_got, bad;
    for (int i = 0; i < D1; i++) exp_v[i] = 0;
    for (int a = 0; a < S1; a++) begin
      sym1[a] = (trial == 0 && a < 2) ? 32'(a) : $urandom;
      for (int pp = 0; pp < P1; pp++)   // Q = 1
        exp_v[pp * (D1/P1) + bucket(mm3_word(sym1[a], seeds1[pp]), D1/P1)] = 1;
    end
    @(negedge clk); start1 = 1;
    @(posedge clk); t0 = cyc;
    @(negedge clk); start1 = 0;
    while (!done1) @(posedge clk);
    check(cyc - t0 == S1 + 4, $sformatf("OR latency %0d, expected %0d", cyc - t0, S1 + 4));
    @(negedge clk);
    bad = 0; nset_exp = 0; nset_got = 0;
    for (int i = 0; i < D1; i++) begin
      if (int'(vec1[i]) != exp_v[i]) bad++;
      nset_exp += exp_v[i];
      nset_got += int'(vec1[i]);
    end
    check(bad == 0, $sformatf("OR trial %0d: %0d coordinates differ", trial, bad));
    check(nset_got == nset_exp, $sformatf("OR trial %0d: %0d set, expected %0d", trial, nset_got, nset_exp));
  endtask

  task automatic run_cnt(int trial);
    int exp_v [D2];
    int t0, bad, maxc;
    for (int i = 0; i < D2; i++) exp_v[i] = 0;
    for (int a = 0; a < S2; a++) begin
      sym2[a] = $urandom;
      for (int pp = 0; pp < P2; pp++)
        for (int j = 0; j < K2/P2; j++) begin
          int idx = pp * (D2/P2) + bucket(mm3_word(sym2[a], seeds2[pp*(K2/P2)+j]), D2/P2);
          if (exp_v[idx] < (1 << C2) - 1) exp_v[idx]++;
        end
    end
    @(negedge clk); start2 = 1;
    @(posedge clk); t0 = cyc;
    @(negedge clk); start2 = 0;
    while (!done2) @(posedge clk);
    check(cyc - t0 == S2 * (K2/P2) + 4, $sformatf("count latency %0d", cyc - t0));
    @(negedge clk);
    bad = 0; maxc = 0;
    for (int i = 0; i < D2; i++) begin
      if (int'(vec2[i]) != exp_v[i]) bad++;
      if (exp_v[i] > maxc) maxc = exp_v[i];
    end
    check(bad == 0, $sformatf("count trial %0d: %0d coordinates differ", trial, bad));
    if (trial == 0) check(maxc >= 2, "no collision exercised in counting mode");
  endtask

  initial begin
    start1 = 0; start2 = 0;
    foreach (seeds1[i]) seeds1[i] = $urandom;
    foreach (seeds2[i]) seeds2[i] = $urandom;
    foreach (sym1[i]) sym1[i] = 0;
    foreach (sym2[i]) sym2[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4; t++) run_or(t);
    for (int t = 0; t < 6; t++) run_cnt(t);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
