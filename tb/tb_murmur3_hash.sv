// tb_murmur3_hash: self-checking testbench of the pipelined Murmur3 unit.
//
// The reference model below is an independent, byte-oriented Murmur3 x86_32
// written the way the public C code processes an arbitrary byte string
// (blocks, tail, finalisation). It is first checked against two published
// test vectors, then used to check 200 random (key, seed) pairs streamed into
// the unit back to back, one per cycle. The latency of three cycles and the
// tag side-band are checked too.
module tb_murmur3_hash;
  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        in_valid;
  logic [31:0] in_key, in_seed;
  logic [7:0]  in_tag;
  logic        out_valid;
  logic [31:0] out_hash;
  logic [7:0]  out_tag;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  murmur3_hash #(.TAG_W(8)) dut (.*);

  function automatic logic [31:0] rl(logic [31:0] x, int r);
    return (x << r) | (x >> (32 - r));
  endfunction

  // Byte-string Murmur3 x86_32, little-endian blocks.
  function automatic logic [31:0] ref_mm3(byte unsigned data[], logic [31:0] seed);
    logic [31:0] h, k;
    int nblocks, i;
    h = seed;
    nblocks = data.size() / 4;
    for (i = 0; i < nblocks; i++) begin
      k = {data[4*i+3], data[4*i+2], data[4*i+1], data[4*i]};
      k = k * 32'hcc9e2d51; k = rl(k, 15); k = k * 32'h1b873593;
      h = h ^ k; h = rl(h, 13); h = h * 5 + 32'he6546b64;
    end
    k = 0;
    case (data.size() % 4)
      3: k = {8'd0, data[4*nblocks+2], data[4*nblocks+1], data[4*nblocks]};
      2: k = {16'd0, data[4*nblocks+1], data[4*nblocks]};
      1: k = {24'd0, data[4*nblocks]};
      default: k = 0;
    endcase
    if (data.size() % 4 != 0) begin
      k = k * 32'hcc9e2d51; k = rl(k, 15); k = k * 32'h1b873593; h = h ^ k;
    end
    h = h ^ 32'(data.size());
    h = h ^ (h >> 16); h = h * 32'h85ebca6b;
    h = h ^ (h >> 13); h = h * 32'hc2b2ae35;
    h = h ^ (h >> 16);
    return h;
  endfunction

  function automatic logic [31:0] ref_word(logic [31:0] key, logic [31:0] seed);
    byte unsigned b[];
    b = new[4];
    b[0] = key[7:0]; b[1] = key[15:8]; b[2] = key[23:16]; b[3] = key[31:24];
    return ref_mm3(b, seed);
  endfunction

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endfunction

  localparam int NV = 200;
  logic [31:0] keys[NV], seeds[NV];
  int sent_cyc[NV];
  int cyc = 0;
  int got = 0;

  always @(posedge clk) cyc <= cyc + 1;

  // Scoreboard: results must come back in order, three cycles after issue.
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      check(out_hash == ref_word(keys[out_tag], seeds[out_tag]),
            $sformatf("hash %0d: got %08h exp %08h", out_tag, out_hash,
                      ref_word(keys[out_tag], seeds[out_tag])));
      check(int'(out_tag) == got, "results out of order");
      check(cyc - sent_cyc[out_tag] == 3,
            $sformatf("latency %0d, expected 3", cyc - sent_cyc[out_tag]));
      got++;
    end
  end

  initial begin
    byte unsigned s1[], s2[];
    // Published vectors of the reference algorithm.
    s1 = new[4]; s1[0] = "t"; s1[1] = "e"; s1[2] = "s"; s1[3] = "t";
    check(ref_mm3(s1, 32'd0) == 32'hba6bd213, "reference model: \"test\"");
    s2 = new[0];
    check(ref_mm3(s2, 32'd0) == 32'h00000000, "reference model: empty string");
    check(ref_mm3(s2, 32'd1) == 32'h514e28b7, "reference model: empty string, seed 1");

    for (int i = 0; i < NV; i++) begin
      keys[i]  = (i < 4) ? 32'(i) : $urandom;
      seeds[i] = (i < 2) ? 32'd0 : $urandom;
    end
    in_valid = 0; in_key = 0; in_seed = 0; in_tag = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < NV; i++) begin
      in_valid <= 1; in_key <= keys[i]; in_seed <= seeds[i]; in_tag <= 8'(i);
      @(posedge clk);
      sent_cyc[i] = cyc;
    end
    in_valid <= 0;
    repeat (10) @(posedge clk);
    check(got == NV, $sformatf("received %0d of %0d results", got, NV));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
