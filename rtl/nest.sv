// nest: the AH x AW FEATHER+ PE array (NEST).
//
// Every column is independent. A streamed element is injected at the top of each column and
// moves down one PE row per cycle, so all PEs of a column reuse the same stream against their
// own stationary VNs (the paper's intra-column reuse constraint). Because each PE row sees the
// stream one cycle after the row above, the rows of a column finish their dot products on
// successive cycles; the column therefore emits at most one partial sum per cycle, which is
// merged onto one column output together with the PE row it came from.
//
// Loading: ld_row selects a PE row, ld_idx an element of the VN, and ld_data carries one
// element per column; all written into the shadow register bank. `swap` exchanges the banks of
// all PEs at once. Rows at or above vn_size are inactive (their results are suppressed), which
// is how a VN size smaller than AH uses only VN_size x AW PEs.
//
// Timing: a psum whose last element entered the top at cycle t leaves row a_h's output at
// t + a_h + 1. Array shape and streaming follow the paper; the merged per-column output port is
// this design's choice, matching the single line per column into BIRRD drawn in its figure.
module nest
  import feather_pkg::*;
#(
  parameter int unsigned AH = 16,
  parameter int unsigned AW = 256
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [$clog2(AH):0]     vn_size,
  input  logic                    ld_we,
  input  logic [$clog2(AH)-1:0]   ld_row,
  input  logic [$clog2(AH)-1:0]   ld_idx,
  input  elem_t                   ld_data [AW],
  input  logic                    swap,
  input  strm_t                   s_in    [AW],
  output logic                    col_valid [AW],
  output acc_t                    col_data  [AW],
  output stag_t                   col_tag   [AW],
  output logic [$clog2(AH)-1:0]   col_row   [AW]
);

  strm_t s_link  [AH+1][AW];
  logic  pv      [AH][AW];
  acc_t  pd      [AH][AW];
  stag_t pt      [AH][AW];

  for (genvar w = 0; w < AW; w++) begin : g_col
    assign s_link[0][w] = s_in[w];
    for (genvar h = 0; h < AH; h++) begin : g_row
      pe #(.AH(AH)) u_pe (
        .clk     (clk),
        .rst_n   (rst_n),
        .active  ((h + 1) <= int'(vn_size)),
        .ld_we   (ld_we && (ld_row == h[$clog2(AH)-1:0])),
        .ld_idx  (ld_idx),
        .ld_data (ld_data[w]),
        .swap    (swap),
        .s_in    (s_link[h][w]),
        .s_out   (s_link[h+1][w]),
        .p_valid (pv[h][w]),
        .p_data  (pd[h][w]),
        .p_tag   (pt[h][w])
      );
    end

    // Merge the column: at most one row finishes per cycle.
    always_comb begin
      col_valid[w] = 1'b0;
      col_data[w]  = '0;
      col_tag[w]   = '0;
      col_row[w]   = '0;
      for (int h = 0; h < AH; h++) begin
        if (pv[h][w]) begin
          col_valid[w] = 1'b1;
          col_data[w]  = pd[h][w];
          col_tag[w]   = pt[h][w];
          col_row[w]   = h[$clog2(AH)-1:0];
        end
      end
    end

    // A column must never finish two dot products in the same cycle.
    logic [AH-1:0] pv_vec;
    always_comb for (int h = 0; h < AH; h++) pv_vec[h] = pv[h][w];
    a_one_psum: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(pv_vec))
      else $error("nest column %0d: two PE rows finished in one cycle", w);
  end

  // The bottom row's forwarded stream is not used.
  strm_t unused_tail [AW];
  always_comb for (int w = 0; w < AW; w++) unused_tail[w] = s_link[AH][w];

endmodule
