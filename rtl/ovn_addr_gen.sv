// ovn_addr_gen: output-address generation for every NEST column.
//
// A column's partial sum carries the tag of the VN that was streamed (index m) and the
// stationary index of its PE, c = cbase + s_r * a_h. Under WO-S the output element is
// O[p = m][n = c]; under IO-S the roles swap and it is O[p = c][n = m]. The element belongs
// to output VN OVN(p, q = n / AH) at element n mod AH. The current SetOVNLayout (order code and
// factors P_L0, P_L1, Q_L1) flattens OVN(p, q) to L with p_L0 = p mod P_L0, p_L1 = p / P_L0,
// q_L1 = q; the element is then stored in bank L mod AW at row (L / AW) * AH + (n mod AH).
// Results outside the output tensor, from zero-padded streamed VNs, or beyond the buffer depth
// are dropped. Purely combinational.
// The flattening and the bank/row formula follow the paper; grouping OVN elements by AH
// (rather than by the VN size) is this design's choice.
module ovn_addr_gen
  import feather_pkg::*;
#(
  parameter int unsigned AH = 16,
  parameter int unsigned AW = 256,
  parameter int unsigned D  = 12500
) (
  input  layout_t               lay_o,
  input  logic                  col_valid [AW],
  input  logic [$clog2(AH)-1:0] col_row   [AW],
  input  stag_t                 col_tag   [AW],
  output logic                  o_valid   [AW],
  output logic [$clog2(AW)-1:0] o_bank    [AW],
  output logic [$clog2(D)-1:0]  o_row     [AW]
);

  always_comb begin
    for (int w = 0; w < AW; w++) begin
      logic [31:0] c, p, n, q, e, l, row;
      c   = 32'(col_tag[w].cbase) + 32'(col_tag[w].sr) * 32'(col_row[w]);
      p   = (col_tag[w].df == DF_WOS) ? 32'(col_tag[w].m) : c;
      n   = (col_tag[w].df == DF_WOS) ? c : 32'(col_tag[w].m);
      q   = n / AH;
      e   = n % AH;
      l   = flat_o(lay_o.order, q, p % 32'(lay_o.x_l0), p / 32'(lay_o.x_l0),
                   32'(lay_o.r_l1), 32'(lay_o.x_l0), 32'(lay_o.x_l1));
      row = (l / AW) * AH + e;
      o_valid[w] = col_valid[w] && col_tag[w].mok
                && (p < 32'(lay_o.x_l0) * 32'(lay_o.x_l1))
                && (q < 32'(lay_o.r_l1))
                && (row < D);
      o_bank[w]  = l[$clog2(AW)-1:0];
      o_row[w]   = row[$clog2(D)-1:0];
    end
  end

endmodule
