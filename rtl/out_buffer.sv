// out_buffer: the FEATHER+ output buffer (OB).
//
// AW banks, one per BIRRD output, each D rows of 32-bit partial sums. It is the only buffer
// with its own address per bank: every cycle each bank may accumulate one value into the row
// given with it (read-modify-write, acc_row[b] += acc_data[b]). This is the temporal reduction
// over the rows of PEs and over successive compute tiles. rd_addr/rd_row reads one row across
// all banks combinationally; clr_en zeroes row clr_row in all banks at the clock edge. The
// controller sweeps these two together to commit finished outputs to an operand buffer and
// initialise the buffer for the next output tile (SetOVNLayout).
// Per-bank addressing and accumulation follow the paper; the read and row-clear ports are this
// design's choice.
module out_buffer
  import feather_pkg::*;
#(
  parameter int unsigned AW = 256,
  parameter int unsigned D  = 12500
) (
  input  logic                 clk,
  input  logic                 clr_en,
  input  logic [$clog2(D)-1:0] clr_row,
  input  logic                 acc_valid [AW],
  input  logic [$clog2(D)-1:0] acc_row   [AW],
  input  acc_t                 acc_data  [AW],
  input  logic [$clog2(D)-1:0] rd_addr,
  output acc_t                 rd_row    [AW]
);

  acc_t mem [AW][D];

  always_comb
    for (int b = 0; b < AW; b++) rd_row[b] = mem[b][rd_addr];

  always_ff @(posedge clk) begin
    for (int b = 0; b < AW; b++) begin
      if (acc_valid[b])
        mem[b][acc_row[b]] <= mem[b][acc_row[b]] + acc_data[b];
      if (clr_en)
        mem[b][clr_row] <= '0;
    end
  end

  // Outputs must have drained before the buffer is swept.
  for (genvar b = 0; b < AW; b++) begin : g_chk
    a_no_acc_on_clear: assert property (@(posedge clk) clr_en |-> !acc_valid[b])
      else $error("out_buffer: accumulate into bank %0d during a clear sweep", b);
  end

endmodule
