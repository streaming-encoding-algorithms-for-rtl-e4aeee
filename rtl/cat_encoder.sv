// cat_encoder: sparse ("Bloom filter") hash encoding of a categorical input.
//
// A categorical input is a set of S symbols a_1..a_S (32-bit identifiers,
// assumed unique across all categorical features). Each symbol is passed
// through K hash functions; every hash output picks one coordinate of the
// D-dimensional encoding phi(x_c), which is set to one (OR, Bloom filter) or,
// in counting mode, incremented (element-wise sum of the symbols' sparse
// codes).
//
// Because hash outputs are data dependent, writes into one memory cannot be
// scheduled in parallel. The encoding vector is therefore split into P equal
// partitions of D/P coordinates, and the K hash functions are split evenly
// over them, Q = K/P per partition: hash function psi_{pp*Q+j} only ever
// writes into partition pp. Each partition owns one pipelined Murmur3 unit
// and takes one write per cycle, so all partitions work in parallel and an
// input takes S*Q issue cycles plus the pipeline (done rises S*Q + 3 cycles after start
// is sampled). Hash function j of partition pp is Murmur3 with seed
// seeds[pp*Q+j]; its 32-bit output is mapped onto the D/P coordinates of the
// partition by a multiply-high range reduction (floor(h*D/P / 2^32)).
// Partitioning and the hash split follow the paper; the range reduction, the
// symbol format and the counter width are this design's choices.
//
// Interface: pulse start with symbols/seeds valid (both are sampled at
// start); vec is cleared at start and complete when done pulses; it then
// holds until the next start. busy is high from start until done.
module cat_encoder
  import hdc_pkg::*;
#(
  parameter int unsigned D     = 10000,  // encoding dimension
  parameter int unsigned P     = 5,      // partitions
  parameter int unsigned K     = 5,      // hash functions (multiple of P)
  parameter int unsigned S     = 26,     // categorical features per input
  parameter bit          COUNT = 1'b0,   // 0: set bits (OR); 1: count (SUM)
  parameter int unsigned CNT_W = 1       // coordinate width (1 when COUNT=0)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [31:0]      symbols [S],
  input  logic [31:0]      seeds   [K],
  output logic             busy,
  output logic             done,
  output logic [CNT_W-1:0] vec     [D]
);

  localparam int unsigned DP    = D / P;
  localparam int unsigned Q     = K / P;
  localparam int unsigned NISS  = S * Q;
  localparam int unsigned IW    = $clog2(NISS + 1);
  localparam int unsigned QW    = (Q > 1) ? $clog2(Q) : 1;
  localparam int unsigned SW    = (S > 1) ? $clog2(S) : 1;
  localparam int unsigned LAT   = 3;     // Murmur3 pipeline depth

  initial begin
    assert (D % P == 0) else $error("D must be a multiple of P");
    assert (K % P == 0) else $error("K must be a multiple of P");
    assert (COUNT || CNT_W == 1) else $error("CNT_W must be 1 in OR mode");
  end

  logic [31:0] sym_q  [S];
  logic [31:0] seed_q [K];
  logic [IW-1:0] iss_cnt;          // issue counter, 0..NISS
  logic          issuing;
  logic [QW-1:0] qi;               // hash index within partition
  logic [SW-1:0] si;               // symbol index
  logic [2:0]    drain;            // cycles left until the last write

  assign issuing = busy && (iss_cnt < IW'(NISS));
  assign qi      = QW'(iss_cnt % IW'(Q));
  assign si      = SW'(iss_cnt / IW'(Q));

  // One hash unit per partition.
  logic        h_valid [P];
  logic [31:0] h_out   [P];

  for (genvar pp = 0; pp < P; pp++) begin : g_part
    logic [0:0] tag_unused;
    murmur3_hash #(.TAG_W(1)) u_hash (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (issuing),
      .in_key   (sym_q[si]),
      .in_seed  (seed_q[pp*Q + qi]),
      .in_tag   (1'b0),
      .out_valid(h_valid[pp]),
      .out_hash (h_out[pp]),
      .out_tag  (tag_unused)
    );
  end

  // Control: issue S*Q (symbol, hash) pairs, then wait for the pipeline.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      iss_cnt <= '0;
      drain   <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy    <= 1'b1;
        iss_cnt <= '0;
        drain   <= 3'(LAT);
      end else if (busy) begin
        if (iss_cnt < IW'(NISS))
          iss_cnt <= iss_cnt + 1'b1;
        else if (drain > 3'd1)
          drain <= drain - 1'b1;
        else begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (start && !busy) begin
      sym_q  <= symbols;
      seed_q <= seeds;
    end
  end

  // Partition write ports: clear on start, then set / increment.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(D); i++) vec[i] <= '0;
    end else if (start && !busy) begin
      for (int i = 0; i < int'(D); i++) vec[i] <= '0;
    end else begin
      for (int pp = 0; pp < int'(P); pp++) begin
        if (h_valid[pp]) begin
          automatic logic [$clog2(D)-1:0] idx = $clog2(D)'(pp * DP + int'(range_reduce(h_out[pp], 32'(DP))));
          if (!COUNT)
            vec[idx] <= '1;
          else if (vec[idx] != '1)      // saturating counter
            vec[idx] <= vec[idx] + 1'b1;
        end
      end
    end
  end

endmodule
