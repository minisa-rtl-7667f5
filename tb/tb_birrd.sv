// tb_birrd: self-checking test of the BIRRD reduction/reordering network (AW = 8, 6 stages).
//
// Every cycle a new random pattern enters (the network is fully pipelined, latency 2*log2(AW)).
// Patterns pick a random set S of index bits: inputs that differ only in the bits of S carry
// the same (bank, row) tag and must be summed; each such group's sum must leave at output
// bank rep ^ k, where rep is the group member with the S bits cleared and k a random XOR
// constant (S empty gives a pure XOR permutation). Random inputs are left invalid. The model
// predicts valid, row and data of every output and err must stay low. A final phase sends
// two different rows to one bank and expects err.
module tb_birrd;
  import feather_pkg::*;

  localparam int unsigned AW = 8;
  localparam int unsigned LG = $clog2(AW);
  localparam int unsigned NS = 2 * LG;
  localparam int unsigned RW = 4;
  localparam int unsigned NP = 300;

  logic clk = 1'b0, rst_n = 1'b0, err;
  logic in_valid [AW], out_valid [AW];
  logic [LG-1:0] in_bank [AW];
  logic [RW-1:0] in_row [AW], out_row [AW];
  acc_t in_data [AW], out_data [AW];
  int   checks = 0, failures = 0;

  birrd #(.AW(AW), .ROW_W(RW)) dut (.clk, .rst_n, .in_valid, .in_bank, .in_row, .in_data,
                                    .out_valid, .out_row, .out_data, .err);

  always #5 clk = ~clk;

  initial begin
    #500000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $display("watchdog expired");
    $finish;
  end

  logic          ev [NP+NS][AW];
  logic [RW-1:0] er [NP+NS][AW];
  acc_t          ed [NP+NS][AW];

  initial begin
    for (int i = 0; i < AW; i++) begin in_valid[i] = 1'b0; in_bank[i] = '0; in_row[i] = '0; in_data[i] = '0; end
    for (int p = 0; p < NP + NS; p++) for (int i = 0; i < AW; i++) begin ev[p][i] = 1'b0; er[p][i] = '0; ed[p][i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int p = 0; p < NP + NS; p++) begin
      if (p < NP) begin
        logic [LG-1:0] smask, k;
        logic [RW-1:0] grow [AW];
        smask = LG'($urandom);
        k     = LG'($urandom);
        for (int i = 0; i < AW; i++) grow[i] = RW'($urandom);
        for (int i = 0; i < AW; i++) begin
          logic [LG-1:0] rep;
          rep = LG'(i) & ~smask;
          in_valid[i] = ($urandom % 5) != 0;
          in_bank[i]  = rep ^ k;
          in_row[i]   = grow[rep];
          in_data[i]  = acc_t'($urandom % 20001) - 10000;
          if (in_valid[i]) begin
            ev[p][rep ^ k] = 1'b1;
            er[p][rep ^ k] = grow[rep];
            ed[p][rep ^ k] += in_data[i];
          end
        end
      end else
        for (int i = 0; i < AW; i++) in_valid[i] = 1'b0;
      @(negedge clk);
      if (p >= NS - 1) begin
        int q;
        q = p - (NS - 1);
        checks++;
        if (err) begin failures++; $display("FAIL err raised on legal pattern near %0d", q); end
        for (int b = 0; b < AW; b++) begin
          checks++;
          if (out_valid[b] !== ev[q][b] || (ev[q][b] && (out_row[b] !== er[q][b] || out_data[b] !== ed[q][b]))) begin
            failures++;
            $display("FAIL pattern %0d bank %0d: got v=%0d r=%0d d=%0d exp v=%0d r=%0d d=%0d",
                     q, b, out_valid[b], out_row[b], out_data[b], ev[q][b], er[q][b], ed[q][b]);
          end
        end
      end
    end
    // conflict: inputs 0 and 1 want bank 3 with different rows
    for (int t = 0; t < 4; t++) begin
      logic seen;
      for (int i = 0; i < AW; i++) in_valid[i] = 1'b0;
      in_valid[0] = 1'b1; in_bank[0] = 3'(t + 3); in_row[0] = 4'd1; in_data[0] = 5;
      in_valid[1 << (t % LG)] = 1'b1; in_bank[1 << (t % LG)] = 3'(t + 3); in_row[1 << (t % LG)] = 4'd2;
      @(negedge clk);
      for (int i = 0; i < AW; i++) in_valid[i] = 1'b0;
      seen = err;
      repeat (NS) begin @(negedge clk); seen |= err; end
      checks++;
      if (!seen) begin failures++; $display("FAIL conflict %0d not flagged", t); end
      repeat (2) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
