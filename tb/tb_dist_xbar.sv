// tb_dist_xbar: self-checking test of the all-to-all distribution crossbar.
//
// An 8-input, 8-output instance is driven with random rows, random selects (including
// multicast of one input to many outputs) and random enables. Each output must carry the
// selected input when enabled and zero otherwise. Combinational: checks one delta later.
module tb_dist_xbar;
  import feather_pkg::*;

  localparam int unsigned N = 8;

  elem_t            in_row [N];
  logic [$clog2(N)-1:0] sel [N];
  logic             en  [N];
  elem_t            out [N];
  int               checks = 0, failures = 0;

  dist_xbar #(.N_IN(N), .N_OUT(N)) dut (.in_row, .sel, .en, .out);

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $display("watchdog expired");
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin in_row[i] = '0; sel[i] = '0; en[i] = 1'b0; end
    for (int it = 0; it < 300; it++) begin
      int unsigned bcast;
      bcast = $urandom % N;
      for (int i = 0; i < N; i++) begin
        in_row[i] = elem_t'($urandom);
        sel[i]    = (it % 5 == 0) ? bcast[$clog2(N)-1:0] : $clog2(N)'($urandom);
        en[i]     = ($urandom % 4) != 0;
      end
      #1;
      for (int o = 0; o < N; o++) begin
        elem_t exp;
        exp = en[o] ? in_row[sel[o]] : '0;
        checks++;
        if (out[o] !== exp) begin
          failures++;
          $display("FAIL it=%0d out[%0d]=%0d exp=%0d", it, o, out[o], exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
