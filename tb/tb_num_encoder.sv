// tb_num_encoder: self-checking testbench of the thresholded random
// projection, at the default sizes (D=10000, P=5, R=64, N=13).
//
// Phi is filled with random signed 8-bit values through the load port (in a
// shuffled row order), random 16-bit inputs are encoded, and every output bit
// is compared with |Phi_i . x| >= thr computed here with 64-bit integers.
// The threshold of each trial is picked from the reference |z| values so
// that roughly a tenth of the coordinates fire; thr = 0 (all ones) is tried
// as well. The start-to-done latency must be NCH + 3 edges (NCH = 32 chunks),
// i.e. done rises NCH + 2 cycles after the edge that samples start.
module tb_num_encoder;
  localparam int D = 10000, P = 5, R = 64, N = 13, PW = 8, XW = 16;
  localparam int ZW = XW + PW + $clog2(N + 1);
  localparam int NCH = (D / P + R - 1) / R;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                 phi_we;
  logic [$clog2(D)-1:0] phi_row;
  logic [N*PW-1:0]      phi_data;
  logic                 start, busy, done;
  logic signed [XW-1:0] x [N];
  logic [ZW-1:0]        thr;
  logic                 vec [D];

  num_encoder #(.D(D), .P(P), .R(R), .N(N), .PHI_W(PW), .X_W(XW)) dut (.*);

  int checks = 0, failures = 0;
  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endfunction

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  byte phi [D][N];
  longint absz [D];

  task automatic run(int trial);
    int t0, bad, ones;
    longint sorted [D];
    for (int e = 0; e < N; e++) x[e] = (trial == 1) ? '0 : XW'($urandom);
    for (int i = 0; i < D; i++) begin
      longint z = 0;
      for (int e = 0; e < N; e++) z += longint'(phi[i][e]) * longint'(x[e]);
      absz[i] = (z < 0) ? -z : z;
      sorted[i] = absz[i];
    end
    sorted.rsort();
    thr = (trial == 2) ? '0 : ZW'(sorted[D / 10]);
    @(negedge clk); start = 1;
    @(posedge clk); t0 = cyc;
    @(negedge clk); start = 0;
    while (!done) @(posedge clk);
    check(cyc - t0 == NCH + 3, $sformatf("latency %0d, expected %0d", cyc - t0, NCH + 3));
    @(negedge clk);
    bad = 0; ones = 0;
    for (int i = 0; i < D; i++) begin
      if (vec[i] != (absz[i] >= longint'(thr))) bad++;
      ones += int'(vec[i]);
    end
    check(bad == 0, $sformatf("trial %0d: %0d bits differ", trial, bad));
    if (trial == 2) check(ones == D, "thr = 0 must set every coordinate");
    if (trial == 1) check(ones == 0 || thr == 0, "x = 0 must set nothing");
    $display("trial %0d: thr=%0d ones=%0d", trial, thr, ones);
  endtask

  initial begin
    int order [D];
    phi_we = 0; phi_row = 0; phi_data = 0; start = 0; thr = 0;
    foreach (x[e]) x[e] = 0;
    for (int i = 0; i < D; i++) begin
      order[i] = i;
      for (int e = 0; e < N; e++) phi[i][e] = byte'($urandom);
    end
    order.shuffle();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < D; k++) begin
      @(negedge clk);
      phi_we = 1; phi_row = $clog2(D)'(order[k]);
      for (int e = 0; e < N; e++) phi_data[e*PW +: PW] = phi[order[k]][e];
    end
    @(negedge clk); phi_we = 0;
    for (int t = 0; t < 5; t++) run(t);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
