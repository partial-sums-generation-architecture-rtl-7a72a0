// memory_unit: LLR register banks of the line SC decoder.
//
// Holds the N channel LLRs (stage n) and, for every stage j = 1..n-1, the
// 2^j LLRs of the block of that stage currently in use (N-2 registers in
// all; stage 0 is consumed at once by the decision and not stored). Within a
// stage the LLR at offset o of its block is kept at position p = 2^j-1-o, so
// that PE p always reads positions p and p+2^j of stage j+1 and writes
// position p of stage j:
//   a[p] = L_{j+1}[p + 2^j],  b[p] = L_{j+1}[p],  L_j[p] <= wdata[p].
// The channel LLRs are stored the same way, ch[q] = lambda_{N-1-q,n}.
// Stage j (j >= 1) is stored at flat index 2^j + p of `mem`.
//
// Interface: `load` copies `llr_in` (natural order, llr_in[i] = lambda_{i,n})
// at the clock edge. `stage` selects j for the read ports `a`/`b`
// (combinational); `we` writes `wdata` into stage `stage` (ignored at j = 0).
// Read ports of PEs p >= 2^j give 0. The paper says only that the memory
// unit keeps the LLRs in register banks; this organisation is this design's.
module memory_unit
  import polar_pkg::*;
#(
  parameter int unsigned N = 1024
) (
  input  logic                       clk,
  input  logic                       load,
  input  llr_t                       llr_in [N],
  input  logic [$clog2(N)-1:0]       stage,
  input  logic                       we,
  input  llr_t                       wdata  [N/2],
  output llr_t                       a      [N/2],
  output llr_t                       b      [N/2]
);

  localparam int unsigned NS = $clog2(N);

  llr_t ch  [N];
  llr_t mem [2:N-1];

  always_ff @(posedge clk)
    if (load)
      for (int unsigned q = 0; q < N; q++)
        ch[q] <= llr_in[N-1-q];

  // Entry e belongs to stage floor(log2 e) and to PE e - 2^stage.
  for (genvar e = 2; e < N; e++) begin : g_ent
    localparam int unsigned J = $clog2(e + 1) - 1;
    localparam int unsigned P = e - (1 << J);
    always_ff @(posedge clk)
      if (we && stage == NS'(J))
        mem[e] <= wdata[P];
  end

  for (genvar p = 0; p < N/2; p++) begin : g_rd
    always_comb begin
      a[p] = '0;
      b[p] = '0;
      for (int unsigned j = 0; j < NS; j++) begin
        if (stage == NS'(j) && p < (1 << j)) begin
          if (j == NS - 1) begin
            a[p] = ch[(1 << j) + p];
            b[p] = ch[p];
          end else begin
            a[p] = mem[(1 << (j + 1)) + (1 << j) + p];
            b[p] = mem[(1 << (j + 1)) + p];
          end
        end
      end
    end
  end

endmodule
