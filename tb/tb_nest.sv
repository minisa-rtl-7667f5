// tb_nest: self-checking test of the PE array (AH = 4, AW = 4).
//
// For several VN sizes (4, 3, 2, 1) the test loads random stationary VNs into every PE through
// the row/element load port, swaps banks, and streams back-to-back random VNs into every
// column (a different stream per column). A reference model computes, for each PE row below
// vn_size, the dot product and the cycle at which it must appear on the merged column output
// (row h, `last` entering at cycle k: output after cycle k + h). Each cycle all column outputs
// (valid, data, tag, row) are compared with the model. Inputs change on the falling edge.
module tb_nest;
  import feather_pkg::*;

  localparam int unsigned AH = 4;
  localparam int unsigned AW = 4;
  localparam int unsigned NC = 200;

  logic  clk = 1'b0, rst_n = 1'b0, ld_we = 1'b0, swap = 1'b0;
  logic [$clog2(AH):0]   vn_size = '0;
  logic [$clog2(AH)-1:0] ld_row = '0, ld_idx = '0;
  elem_t ld_data [AW];
  strm_t s_in [AW];
  logic  col_valid [AW];
  acc_t  col_data  [AW];
  stag_t col_tag   [AW];
  logic [$clog2(AH)-1:0] col_row [AW];
  int    checks = 0, failures = 0;

  nest #(.AH(AH), .AW(AW)) dut (.clk, .rst_n, .vn_size, .ld_we, .ld_row, .ld_idx, .ld_data,
                                .swap, .s_in, .col_valid, .col_data, .col_tag, .col_row);

  always #5 clk = ~clk;

  initial begin
    #500000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $display("watchdog expired");
    $finish;
  end

  elem_t w_reg [AH][AW][AH];
  logic  e_v   [NC][AW];
  acc_t  e_d   [NC][AW];
  stag_t e_t   [NC][AW];
  int    e_r   [NC][AW];

  initial begin
    for (int w = 0; w < AW; w++) begin ld_data[w] = '0; s_in[w] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int vs = AH; vs >= 1; vs--) begin
      // load every PE's shadow registers
      for (int h = 0; h < AH; h++)
        for (int e = 0; e < AH; e++) begin
          ld_we = 1'b1; ld_row = h[1:0]; ld_idx = e[1:0];
          for (int w = 0; w < AW; w++) begin
            w_reg[h][w][e] = elem_t'($urandom);
            ld_data[w]     = w_reg[h][w][e];
          end
          @(negedge clk);
        end
      ld_we = 1'b0;
      swap = 1'b1; vn_size = ($clog2(AH)+1)'(vs); @(negedge clk); swap = 1'b0;
      for (int c = 0; c < NC; c++)
        for (int w = 0; w < AW; w++) begin e_v[c][w] = 1'b0; e_d[c][w] = '0; e_t[c][w] = '0; e_r[c][w] = 0; end
      // stream 8 VNs of vs elements into every column; check every cycle
      for (int c = 0; c < NC - 1; c++) begin
        for (int w = 0; w < AW; w++) begin
          s_in[w] = '0;
          if (c < 8 * vs) begin
            int e;
            e = c % vs;
            s_in[w].valid = 1'b1;
            s_in[w].last  = (e == vs - 1);
            s_in[w].eidx  = 8'(e);
            s_in[w].data  = elem_t'($urandom);
            s_in[w].tag   = stag_t'({$urandom, $urandom, $urandom});
            push_hist(w, c, s_in[w].data);
            // each row h sees this element at cycle c + h
            if (s_in[w].last)
              for (int h = 0; h < vs; h++) begin
                acc_t dp;
                dp = '0;
                for (int k = 0; k < vs; k++) dp += acc_t'(hist(w, c - vs + 1 + k)) * acc_t'(w_reg[h][w][k]);
                e_v[c + h][w] = 1'b1;
                e_d[c + h][w] = dp;
                e_t[c + h][w] = s_in[w].tag;
                e_r[c + h][w] = h;
              end
          end
        end
        @(negedge clk);
        for (int w = 0; w < AW; w++) begin
          checks++;
          if (col_valid[w] !== e_v[c][w] ||
              (e_v[c][w] && (col_data[w] !== e_d[c][w] || col_tag[w] !== e_t[c][w] ||
                             int'(col_row[w]) != e_r[c][w]))) begin
            failures++;
            $display("FAIL vs=%0d c=%0d w=%0d got v=%0d d=%0d r=%0d exp v=%0d d=%0d r=%0d",
                     vs, c, w, col_valid[w], col_data[w], col_row[w], e_v[c][w], e_d[c][w], e_r[c][w]);
          end
        end
      end
      for (int w = 0; w < AW; w++) s_in[w] = '0;
      repeat (AH + 2) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // history of streamed data per column (to rebuild each VN at its last element)
  elem_t hbuf [AW][NC];
  initial for (int w = 0; w < AW; w++) for (int c = 0; c < NC; c++) hbuf[w][c] = '0;
  function automatic elem_t hist(input int w, input int c);
    return hbuf[w][c];
  endfunction
  task automatic push_hist(input int w, input int c, input elem_t d);
    hbuf[w][c] = d;
  endtask
endmodule
