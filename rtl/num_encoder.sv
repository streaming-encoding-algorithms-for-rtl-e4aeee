// num_encoder: sparse random-projection encoding of the numeric features.
//
// Computes z = Phi * x_n for a D x N projection matrix Phi and an N-element
// numeric input x_n, then sparsifies it by thresholding:
// phi(x_n)_i = 1 when |z_i| >= thr, else 0. Thresholding stands in for
// top-k selection, which would need a sort.
//
// Organisation (following the paper's FPGA mapping): the D rows of Phi are
// split into P coarse partitions of D/P consecutive rows, and inside each
// partition R rows are processed per cycle, so P*R rows are handled per
// cycle. Each row is a full dot product of N terms in one cycle (the inner
// loop is unrolled). Each of the P*R lanes owns one memory of NCH = ceil(D/P/R)
// words, with one full row of Phi (N elements of PHI_W bits) per word; lane
// (pp, j) holds rows pp*D/P + c*R + j for c = 0..NCH-1. Lanes of the last
// chunk that fall past the partition end are idle.
//
// Pipeline, per chunk c: read the word (cycle 1), N multiplies and the sum
// (cycle 2), threshold and write the bit (cycle 3). done rises NCH + 2 cycles
// after the edge that samples start (34 for the default sizes).
//
// Interface: Phi is loaded by the host one row at a time (phi_we, phi_row,
// phi_data, element 0 in the low bits). start samples x and thr; vec is
// complete when done pulses and holds until the next start.
// Choices of this design: element widths, signed two's complement Phi and
// x_n, the threshold as a runtime input, the Phi load port.
module num_encoder #(
  parameter int unsigned D     = 10000,  // encoding dimension (rows of Phi)
  parameter int unsigned P     = 5,      // coarse partitions
  parameter int unsigned R     = 64,     // rows per partition per cycle
  parameter int unsigned N     = 13,     // numeric features
  parameter int unsigned PHI_W = 8,      // Phi element width (signed)
  parameter int unsigned X_W   = 16,     // numeric feature width (signed)
  localparam int unsigned Z_W  = X_W + PHI_W + $clog2(N + 1),
  localparam int unsigned ROW_W = $clog2(D)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // Phi load port
  input  logic                    phi_we,
  input  logic [ROW_W-1:0]        phi_row,
  input  logic [N*PHI_W-1:0]      phi_data,
  // encoding
  input  logic                    start,
  input  logic signed [X_W-1:0]   x     [N],
  input  logic [Z_W-1:0]          thr,
  output logic                    busy,
  output logic                    done,
  output logic                    vec   [D]
);

  localparam int unsigned DP  = D / P;
  localparam int unsigned NCH = (DP + R - 1) / R;
  localparam int unsigned CW  = (NCH > 1) ? $clog2(NCH) : 1;
  localparam int unsigned L   = P * R;

  initial assert (D % P == 0) else $error("D must be a multiple of P");

  // Control
  logic [CW:0]  rd_c;                 // chunk being read, NCH = finished
  logic         rd_v, mac_v;
  logic [CW-1:0] rd_cq, mac_cq;
  logic signed [X_W-1:0] x_q [N];
  logic [Z_W-1:0] thr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      rd_c <= '0;
      rd_v <= 1'b0;
      mac_v <= 1'b0;
      rd_cq <= '0;
      mac_cq <= '0;
    end else begin
      done  <= 1'b0;
      rd_v  <= busy && (rd_c < (CW+1)'(NCH));
      rd_cq <= CW'(rd_c);
      mac_v <= rd_v;
      mac_cq <= rd_cq;
      if (start && !busy) begin
        busy <= 1'b1;
        rd_c <= '0;
      end else if (busy) begin
        if (rd_c < (CW+1)'(NCH))
          rd_c <= rd_c + 1'b1;
        else if (!rd_v && mac_v) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (start && !busy) begin
      x_q   <= x;
      thr_q <= thr;
    end
  end

  // Lanes: memory, multiply-accumulate, threshold.
  logic [N*PHI_W-1:0]     rd_word [L];
  logic signed [Z_W-1:0]  z_q     [L];

  for (genvar pp = 0; pp < P; pp++) begin : g_part
    for (genvar j = 0; j < R; j++) begin : g_lane
      localparam int unsigned LN = pp * R + j;
      logic [N*PHI_W-1:0] mem [NCH];

      // host write: row -> (partition, chunk, lane)
      always_ff @(posedge clk) begin
        if (phi_we && (int'(phi_row) / DP == pp) &&
            ((int'(phi_row) % DP) % R == j))
          mem[CW'((int'(phi_row) % DP) / R)] <= phi_data;
      end

      always_ff @(posedge clk) begin
        rd_word[LN] <= mem[CW'(rd_c)];
      end

      always_ff @(posedge clk) begin
        logic signed [Z_W-1:0] acc;
        acc = '0;
        for (int e = 0; e < int'(N); e++)
          acc += Z_W'($signed(rd_word[LN][e*PHI_W +: PHI_W])) * Z_W'(x_q[e]);
        z_q[LN] <= acc;
      end

      // thresholded bits of this lane, one per chunk
      logic bits [NCH];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int c = 0; c < int'(NCH); c++) bits[c] <= 1'b0;
        end else if (start && !busy) begin
          for (int c = 0; c < int'(NCH); c++) bits[c] <= 1'b0;
        end else if (mac_v) begin
          bits[mac_cq] <= ((z_q[LN] < 0) ? Z_W'(-z_q[LN]) : Z_W'(z_q[LN])) >= thr_q;
        end
      end
      for (genvar c = 0; c < NCH; c++) begin : g_out
        if (c * R + j < DP) begin : g_used
          assign vec[pp * DP + c * R + j] = bits[c];
        end
      end
    end
  end

endmodule
