// tb_vn_buffer: self-checking test of the ping/pong operand buffer (AW = 4, D = 16).
//
// A reference copy of both halves is kept here. Random cycles write random rows into the
// shadow or the active half, swap the halves, and read both read ports at random addresses;
// the two combinational read ports must always return the reference's active half, and
// active_half must follow the swaps. Inputs change on the falling edge; reads are checked
// just before the next rising edge.
module tb_vn_buffer;
  import feather_pkg::*;

  localparam int unsigned AW = 4;
  localparam int unsigned D  = 16;
  localparam int unsigned LD = $clog2(D);

  logic clk = 1'b0, rst_n = 1'b0, wr_en = 1'b0, wr_shadow = 1'b0, swap = 1'b0, active_half;
  logic [LD-1:0] rd_addr = '0, st_addr = '0, wr_addr = '0;
  elem_t rd_row [AW], st_row [AW], wr_row [AW];
  int    checks = 0, failures = 0;

  vn_buffer #(.AW(AW), .D(D)) dut (.clk, .rst_n, .rd_addr, .rd_row, .st_addr, .st_row, .wr_en,
                                   .wr_shadow, .wr_addr, .wr_row, .swap, .active_half);

  always #5 clk = ~clk;

  initial begin
    #500000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $display("watchdog expired");
    $finish;
  end

  elem_t ref_m [2][D][AW];
  logic  act;

  initial begin
    act = 1'b0;
    for (int w = 0; w < AW; w++) wr_row[w] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // fill both halves first so every read is defined
    for (int h = 0; h < 2; h++) begin
      for (int r = 0; r < D; r++) begin
        wr_en = 1'b1; wr_shadow = 1'b1; wr_addr = LD'(r);
        for (int w = 0; w < AW; w++) begin wr_row[w] = elem_t'($urandom); ref_m[~act][r][w] = wr_row[w]; end
        @(negedge clk);
      end
      wr_en = 1'b0; swap = 1'b1; @(negedge clk); swap = 1'b0; act = ~act;
    end
    for (int it = 0; it < 600; it++) begin
      wr_en     = ($urandom % 2) == 0;
      wr_shadow = ($urandom % 2) == 0;
      wr_addr   = LD'($urandom);
      swap      = ($urandom % 6) == 0;
      rd_addr   = LD'($urandom);
      st_addr   = LD'($urandom);
      for (int w = 0; w < AW; w++) wr_row[w] = elem_t'($urandom);
      #4;
      checks++;
      if (active_half !== act) begin failures++; $display("FAIL active_half it=%0d", it); end
      for (int w = 0; w < AW; w++) begin
        checks += 2;
        if (rd_row[w] !== ref_m[act][rd_addr][w]) begin failures++; $display("FAIL rd it=%0d w=%0d", it, w); end
        if (st_row[w] !== ref_m[act][st_addr][w]) begin failures++; $display("FAIL st it=%0d w=%0d", it, w); end
      end
      @(posedge clk);
      if (wr_en) for (int w = 0; w < AW; w++) ref_m[wr_shadow ? ~act : act][wr_addr][w] = wr_row[w];
      if (swap) act = ~act;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
