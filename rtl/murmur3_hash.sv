// murmur3_hash: pipelined Murmur3 (x86_32 variant) of one 32-bit key.
//
// Each categorical symbol is hashed with a 32-bit seed; a different seed gives
// a different, independent-looking hash function psi_j. The unit accepts one
// key per cycle and returns its hash three cycles later (throughput of one
// hash per cycle, latency 3), matching the three-stage pipelined Murmur3
// described for the hardware. The split of the arithmetic into the three
// stages is this design's own:
//   stage 1: k = rotl(key * C1, 15) * C2
//   stage 2: h = rotl(seed ^ k, 13) * 5 + N;  h ^= len;  h ^= h >> 16;  h *= F1
//   stage 3: h ^= h >> 13;  h *= F2;  h ^= h >> 16
// A TAG_W-bit side-band tag travels with each key so that the caller can
// identify the result (e.g. which partition or symbol it belongs to).
//
// Interface: in_valid/in_key/in_seed/in_tag in; out_valid/out_hash/out_tag
// out, registered. No back-pressure: the consumer must accept every result.
module murmur3_hash
  import hdc_pkg::*;
#(
  parameter int unsigned TAG_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [31:0]      in_key,
  input  logic [31:0]      in_seed,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output logic [31:0]      out_hash,
  output logic [TAG_W-1:0] out_tag
);

  logic             v1, v2;
  logic [31:0]      k1_q, seed1_q, h2_q;
  logic [TAG_W-1:0] tag1_q, tag2_q;

  logic [31:0] k1_d, h2_d, h3_d;

  always_comb begin
    k1_d = rotl32(in_key * MM3_C1, 15) * MM3_C2;
  end

  always_comb begin
    logic [31:0] h;
    h = rotl32(seed1_q ^ k1_q, 13);
    h = h * 32'd5 + MM3_N;
    h = h ^ MM3_LEN;
    h = h ^ (h >> 16);
    h2_d = h * MM3_F1;
  end

  always_comb begin
    logic [31:0] h;
    h = h2_q ^ (h2_q >> 13);
    h = h * MM3_F2;
    h3_d = h ^ (h >> 16);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1        <= 1'b0;
      v2        <= 1'b0;
      out_valid <= 1'b0;
      k1_q      <= '0;
      seed1_q   <= '0;
      h2_q      <= '0;
      out_hash  <= '0;
      tag1_q    <= '0;
      tag2_q    <= '0;
      out_tag   <= '0;
    end else begin
      v1        <= in_valid;
      k1_q      <= k1_d;
      seed1_q   <= in_seed;
      tag1_q    <= in_tag;
      v2        <= v1;
      h2_q      <= h2_d;
      tag2_q    <= tag1_q;
      out_valid <= v2;
      out_hash  <= h3_d;
      out_tag   <= tag2_q;
    end
  end

endmodule
