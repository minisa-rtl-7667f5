// tb_pe: self-checking test of one processing element (AH = 4).
//
// Each round writes a random VN into the shadow registers, swaps banks, and streams a random
// VN one element per cycle (eidx 0..3, `last` on the final element) while the next round's VN
// is already written into the shadow bank. The PE must produce the 4-element dot product with
// the streamed tag one cycle after `last`, forward the stream with one cycle of latency, and
// suppress its result when `active` is low. Inputs change on the falling edge.
module tb_pe;
  import feather_pkg::*;

  localparam int unsigned AH = 4;

  logic  clk = 1'b0, rst_n = 1'b0, active = 1'b1, ld_we = 1'b0, swap = 1'b0;
  logic [$clog2(AH)-1:0] ld_idx = '0;
  elem_t ld_data = '0;
  strm_t s_in = '0, s_out, prev_in;
  logic  p_valid;
  acc_t  p_data;
  stag_t p_tag;
  int    checks = 0, failures = 0;

  pe #(.AH(AH)) dut (.clk, .rst_n, .active, .ld_we, .ld_idx, .ld_data, .swap, .s_in, .s_out,
                     .p_valid, .p_data, .p_tag);

  always #5 clk = ~clk;

  initial begin
    #200000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $display("watchdog expired");
    $finish;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  elem_t nxt [AH];
  elem_t cur [AH];
  elem_t sv  [AH];
  stag_t tg;
  acc_t  exp;

  initial begin
    for (int i = 0; i < AH; i++) begin nxt[i] = '0; cur[i] = '0; sv[i] = '0; end
    tg = '0; exp = '0; prev_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // first shadow fill
    for (int i = 0; i < AH; i++) begin
      nxt[i] = elem_t'($urandom); ld_we = 1'b1; ld_idx = i[1:0]; ld_data = nxt[i];
      @(negedge clk);
    end
    ld_we = 1'b0;
    for (int round = 0; round < 40; round++) begin
      cur = nxt;
      swap = 1'b1; @(negedge clk); swap = 1'b0;
      active = (round % 5) != 3;
      tg = stag_t'({$urandom, $urandom, $urandom});
      exp = '0;
      for (int e = 0; e < AH; e++) begin
        sv[e] = elem_t'($urandom);
        exp += acc_t'(sv[e]) * acc_t'(cur[e]);
        s_in = '0;
        s_in.valid = 1'b1; s_in.last = (e == AH - 1); s_in.eidx = 8'(e);
        s_in.data = sv[e]; s_in.tag = tg;
        // overlap: write the next VN into the shadow bank meanwhile
        nxt[e] = elem_t'($urandom); ld_we = 1'b1; ld_idx = e[1:0]; ld_data = nxt[e];
        @(negedge clk);
        check(s_out == s_in_d(e, sv[e]), "stream forwarded with latency 1");
        if (e < AH - 1) check(!p_valid, "no result before last");
      end
      s_in = '0; ld_we = 1'b0;
      if (active) begin
        check(p_valid, "result valid after last");
        check(p_data == exp, $sformatf("dot product got=%0d exp=%0d", p_data, exp));
        check(p_tag == tg, "tag carried with result");
      end else
        check(!p_valid, "inactive PE suppresses result");
      @(negedge clk);
      check(!p_valid, "result is a single-cycle pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic strm_t s_in_d(input int e, input elem_t d);
    strm_t s;
    s = '0; s.valid = 1'b1; s.last = (e == AH - 1); s.eidx = 8'(e); s.data = d; s.tag = tg;
    return s;
  endfunction
endmodule
