// tb_out_buffer: self-checking test of the banked accumulating output buffer (AW = 4, D = 8).
//
// The buffer is first swept clear row by row. Then random cycles let each bank accumulate a
// random value into a random row (read-modify-write, every bank independent), interleaved
// with clear sweeps, which must zero each row they visit. A reference copy is updated the same
// way and every row of every bank is compared through the combinational read port.
module tb_out_buffer;
  import feather_pkg::*;

  localparam int unsigned AW = 4;
  localparam int unsigned D  = 8;
  localparam int unsigned LD = $clog2(D);

  logic clk = 1'b0, clr_en = 1'b0;
  logic [LD-1:0] clr_row = '0, rd_addr = '0;
  logic acc_valid [AW];
  logic [LD-1:0] acc_row [AW];
  acc_t acc_data [AW], rd_row [AW];
  int   checks = 0, failures = 0;

  out_buffer #(.AW(AW), .D(D)) dut (.clk, .clr_en, .clr_row, .acc_valid, .acc_row, .acc_data,
                                    .rd_addr, .rd_row);

  always #5 clk = ~clk;

  initial begin
    #500000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $display("watchdog expired");
    $finish;
  end

  acc_t ref_m [AW][D];

  task automatic sweep();
    for (int b = 0; b < AW; b++) acc_valid[b] = 1'b0;
    for (int r = 0; r < D; r++) begin
      clr_en = 1'b1; clr_row = LD'(r);
      @(negedge clk);
      for (int b = 0; b < AW; b++) ref_m[b][r] = '0;
    end
    clr_en = 1'b0;
  endtask

  task automatic compare(input string when);
    for (int r = 0; r < D; r++) begin
      rd_addr = LD'(r);
      #1;
      for (int b = 0; b < AW; b++) begin
        checks++;
        if (rd_row[b] !== ref_m[b][r]) begin
          failures++;
          $display("FAIL %s bank=%0d row=%0d got=%0d exp=%0d", when, b, r, rd_row[b], ref_m[b][r]);
        end
      end
    end
    @(negedge clk);
  endtask

  initial begin
    for (int b = 0; b < AW; b++) begin acc_valid[b] = 1'b0; acc_row[b] = '0; acc_data[b] = '0; end
    @(negedge clk);
    sweep();
    compare("after first sweep");
    for (int round = 0; round < 6; round++) begin
      for (int it = 0; it < 60; it++) begin
        for (int b = 0; b < AW; b++) begin
          acc_valid[b] = ($urandom % 3) != 0;
          acc_row[b]   = LD'($urandom);
          acc_data[b]  = acc_t'($urandom % 2001) - 1000;
        end
        @(negedge clk);
        for (int b = 0; b < AW; b++)
          if (acc_valid[b]) ref_m[b][acc_row[b]] += acc_data[b];
      end
      for (int b = 0; b < AW; b++) acc_valid[b] = 1'b0;
      compare($sformatf("after accumulate round %0d", round));
      sweep();
      compare($sformatf("after sweep round %0d", round));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
