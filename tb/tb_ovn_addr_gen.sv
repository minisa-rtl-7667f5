// tb_ovn_addr_gen: self-checking test of the output address generator (AH = 4, AW = 4, D = 32).
//
// Random output layouts (all six order codes, random partition factors) and random column
// results (tags under both dataflows, random PE rows) are applied. An independent model
// derives the output coordinates (p, n) from the tag, places output element (p, n) at VN
// (q = n / AH, p) of the OVN layout by enumerating the order code's loop nest, and predicts
// valid, bank and row for every column. Combinational: checked one delta after each change.
module tb_ovn_addr_gen;
  import feather_pkg::*;

  localparam int unsigned AH = 4;
  localparam int unsigned AW = 4;
  localparam int unsigned D  = 32;

  layout_t lay_o;
  logic    col_valid [AW];
  logic [$clog2(AH)-1:0] col_row [AW];
  stag_t   col_tag [AW];
  logic    o_valid [AW];
  logic [$clog2(AW)-1:0] o_bank [AW];
  logic [$clog2(D)-1:0]  o_row [AW];
  int      checks = 0, failures = 0;

  ovn_addr_gen #(.AH(AH), .AW(AW), .D(D)) dut (.lay_o, .col_valid, .col_row, .col_tag,
                                               .o_valid, .o_bank, .o_row);

  initial begin
    #500000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $display("watchdog expired");
    $finish;
  end

  // position of VN (q, p) in the loop nest named by the order code (outermost first)
  function automatic int flat_ref(input int order, input int q, input int p0, input int p1,
                                  input int nq, input int n0, input int n1);
    int cnt;
    int a [3], na [3];  // loop variables outer..inner
    // 0:X1,X0,R 1:X1,R,X0 2:X0,X1,R 3:X0,R,X1 4:R,X1,X0 5:R,X0,X1  (X1=p1, X0=p0, R=q)
    case (order)
      1: begin a = '{p1, q, p0}; na = '{n1, nq, n0}; end
      2: begin a = '{p0, p1, q}; na = '{n0, n1, nq}; end
      3: begin a = '{p0, q, p1}; na = '{n0, nq, n1}; end
      4: begin a = '{q, p1, p0}; na = '{nq, n1, n0}; end
      5: begin a = '{q, p0, p1}; na = '{nq, n0, n1}; end
      default: begin a = '{p1, p0, q}; na = '{n1, n0, nq}; end
    endcase
    cnt = 0;
    for (int i = 0; i < na[0]; i++)
      for (int j = 0; j < na[1]; j++)
        for (int k = 0; k < na[2]; k++) begin
          if (i == a[0] && j == a[1] && k == a[2]) return cnt;
          cnt++;
        end
    return -1;
  endfunction

  initial begin
    lay_o = '0;
    for (int w = 0; w < AW; w++) begin col_valid[w] = 1'b0; col_row[w] = '0; col_tag[w] = '0; end
    for (int it = 0; it < 400; it++) begin
      lay_o.order = 3'($urandom % 6);
      lay_o.x_l0  = idx_t'(1 + $urandom % 4);
      lay_o.x_l1  = idx_t'(1 + $urandom % 6);
      lay_o.r_l1  = idx_t'(1 + $urandom % 3);
      for (int w = 0; w < AW; w++) begin
        col_valid[w]    = ($urandom % 4) != 0;
        col_row[w]      = 2'($urandom);
        col_tag[w].m    = idx_t'($urandom % 26);
        col_tag[w].mok  = ($urandom % 8) != 0;
        col_tag[w].cbase= idx_t'($urandom % 8);
        col_tag[w].sr   = idx_t'($urandom % 4);
        col_tag[w].df   = dataflow_e'($urandom % 2);
      end
      #1;
      for (int w = 0; w < AW; w++) begin
        int c, p, n, q, e, l, row;
        logic ev;
        c = int'(col_tag[w].cbase) + int'(col_tag[w].sr) * int'(col_row[w]);
        p = (col_tag[w].df == DF_WOS) ? int'(col_tag[w].m) : c;
        n = (col_tag[w].df == DF_WOS) ? c : int'(col_tag[w].m);
        q = n / AH; e = n % AH;
        ev = col_valid[w] && col_tag[w].mok && p < int'(lay_o.x_l0 * lay_o.x_l1) && q < int'(lay_o.r_l1);
        l = ev ? flat_ref(lay_o.order, q, p % int'(lay_o.x_l0), p / int'(lay_o.x_l0),
                          int'(lay_o.r_l1), int'(lay_o.x_l0), int'(lay_o.x_l1)) : 0;
        row = (l / AW) * AH + e;
        ev = ev && row < D;
        checks++;
        if (o_valid[w] !== ev || (ev && (int'(o_bank[w]) != l % AW || int'(o_row[w]) != row))) begin
          failures++;
          $display("FAIL it=%0d w=%0d ord=%0d p=%0d n=%0d got v=%0d b=%0d r=%0d exp v=%0d b=%0d r=%0d",
                   it, w, lay_o.order, p, n, o_valid[w], o_bank[w], o_row[w], ev, l % AW, row);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
