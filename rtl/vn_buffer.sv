// vn_buffer: a FEATHER+ operand buffer (used for both the streaming and the stationary buffer).
//
// The buffer is D rows by AW columns of 8-bit elements and is ping/pong double buffered: one
// half (the active half) feeds compute while the other (shadow) half is filled from off-chip
// memory; `swap` exchanges them. A VN occupies consecutive rows at one column, so compute reads
// one whole row per cycle from a single bank and the distribution crossbar picks elements out
// of it (FEATHER+ regressed FEATHER's multi-bank streaming buffer to this single bank).
//
// Ports: rd_addr/rd_row is the compute read port, st_addr/st_row a second read port used to
// copy data out (Store); both read the active half combinationally, as the register-built
// buffers of the paper's own implementation allow. wr_* writes one row, into the shadow half
// (wr_shadow = 1, off-chip loads) or into the active half (wr_shadow = 0, output commit).
// Writes and swap take effect at the clock edge. Depth, banking and ping/pong follow the paper;
// port set and combinational reads are this design's choice.
module vn_buffer
  import feather_pkg::*;
#(
  parameter int unsigned AW = 256,
  parameter int unsigned D  = 50000
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [$clog2(D)-1:0] rd_addr,
  output elem_t                rd_row [AW],
  input  logic [$clog2(D)-1:0] st_addr,
  output elem_t                st_row [AW],
  input  logic                 wr_en,
  input  logic                 wr_shadow,
  input  logic [$clog2(D)-1:0] wr_addr,
  input  elem_t                wr_row [AW],
  input  logic                 swap,
  output logic                 active_half
);

  elem_t mem [2][D][AW];
  logic  act;

  assign active_half = act;

  always_comb begin
    for (int w = 0; w < AW; w++) begin
      rd_row[w] = mem[act][rd_addr][w];
      st_row[w] = mem[act][st_addr][w];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) act <= 1'b0;
    else if (swap) act <= ~act;
  end

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int w = 0; w < AW; w++) mem[wr_shadow ? ~act : act][wr_addr][w] <= wr_row[w];
  end

endmodule
