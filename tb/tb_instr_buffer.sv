// tb_instr_buffer: self-checking test of the instruction FIFO (W = 16, DEPTH = 8).
//
// Random push and pop requests, with phases that fill the queue to full and drain it to empty,
// are checked against a reference queue: popped words must come out in push order, push_ready
// must drop exactly when full, pop_valid exactly when empty, and count must track the
// occupancy. Inputs change on the falling edge.
module tb_instr_buffer;

  localparam int unsigned W = 16;
  localparam int unsigned DEPTH = 8;

  logic clk = 1'b0, rst_n = 1'b0, push_valid = 1'b0, pop_ready = 1'b0;
  logic push_ready, pop_valid;
  logic [W-1:0] push_data = '0, pop_data;
  logic [$clog2(DEPTH):0] count;
  int   checks = 0, failures = 0;

  instr_buffer #(.W(W), .DEPTH(DEPTH)) dut (.clk, .rst_n, .push_valid, .push_ready, .push_data,
                                            .pop_valid, .pop_ready, .pop_data, .count);

  always #5 clk = ~clk;

  initial begin
    #500000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $display("watchdog expired");
    $finish;
  end

  logic [W-1:0] q [$];

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 1000; it++) begin
      int phase;
      phase = (it / 100) % 3;  // 0 mixed, 1 mostly push, 2 mostly pop
      push_valid = (phase == 1) ? ($urandom % 5 != 0) : (phase == 2) ? ($urandom % 5 == 0) : ($urandom % 2 == 0);
      pop_ready  = (phase == 2) ? ($urandom % 5 != 0) : (phase == 1) ? ($urandom % 5 == 0) : ($urandom % 2 == 0);
      push_data  = W'($urandom);
      #1;
      check(int'(count) == q.size(), "count tracks occupancy");
      check(push_ready == (q.size() < DEPTH), "push_ready iff not full");
      check(pop_valid == (q.size() > 0), "pop_valid iff not empty");
      if (pop_valid) check(pop_data == q[0], "pop order");
      @(posedge clk);
      if (pop_valid && pop_ready) void'(q.pop_front());
      if (push_valid && push_ready) q.push_back(push_data);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
