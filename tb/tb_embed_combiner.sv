// tb_embed_combiner: checks the four combining rules (OR, SUM, No-Count and
// concatenation, with the numeric half first) on random sparse vectors,
// including coordinates where both embeddings are non-zero, and that the
// output holds while load is low.
module tb_embed_combiner;
  import hdc_pkg::*;
  localparam int D = 64, CW = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          load;
  logic [CW-1:0] vc [D];
  logic          vn [D];
  logic [0:0]    e_or [D];
  logic [CW:0]   e_sum [D];
  logic [0:0]    e_nc [D];
  logic [0:0]    e_cc [2*D];

  embed_combiner #(.D(D), .MODE(CMB_OR), .CNT_W(CW), .EMB_W(1)) u_or
    (.clk, .rst_n, .load, .vec_c(vc), .vec_n(vn), .emb(e_or));
  embed_combiner #(.D(D), .MODE(CMB_SUM), .CNT_W(CW)) u_sum
    (.clk, .rst_n, .load, .vec_c(vc), .vec_n(vn), .emb(e_sum));
  embed_combiner #(.D(D), .MODE(CMB_NOCOUNT), .CNT_W(CW), .EMB_W(1)) u_nc
    (.clk, .rst_n, .load, .vec_c(vc), .vec_n(vn), .emb(e_nc));
  embed_combiner #(.D(D), .MODE(CMB_CONCAT), .CNT_W(CW), .EMB_W(1)) u_cc
    (.clk, .rst_n, .load, .vec_c(vc), .vec_n(vn), .emb(e_cc));

  int checks = 0, failures = 0;
  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endfunction

  initial begin
    int both;
    int ec [D], en [D];
    load = 0;
    foreach (vc[i]) begin vc[i] = 0; vn[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    both = 0;
    for (int t = 0; t < 20; t++) begin
      @(negedge clk);
      for (int i = 0; i < D; i++) begin
        ec[i] = ($urandom % 3 == 0) ? int'($urandom % 8) : 0;
        en[i] = ($urandom % 3 == 0) ? 1 : 0;
        vc[i] = CW'(ec[i]); vn[i] = en[i][0];
        if (ec[i] != 0 && en[i] != 0) both++;
      end
      load = 1;
      @(negedge clk);
      load = 0;
      for (int i = 0; i < D; i++) begin
        vc[i] = ~vc[i]; vn[i] = ~vn[i];      // must not be seen without load
      end
      @(negedge clk);
      for (int i = 0; i < D; i++) begin
        check(int'(e_or[i])  == ((ec[i] != 0 || en[i] != 0) ? 1 : 0), $sformatf("OR  [%0d]", i));
        check(int'(e_sum[i]) == ec[i] + en[i],                          $sformatf("SUM [%0d]", i));
        check(int'(e_nc[i])  == ((ec[i] != 0) ? 1 : 0),                 $sformatf("NC  [%0d]", i));
        check(int'(e_cc[i])  == en[i],                                  $sformatf("CAT numeric [%0d]", i));
        check(int'(e_cc[D + i]) == ((ec[i] != 0) ? 1 : 0),              $sformatf("CAT categorical [%0d]", i));
      end
    end
    check(both > 0, "no overlapping coordinates exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
