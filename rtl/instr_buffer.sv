// instr_buffer: the dedicated on-chip MINISA instruction buffer, a first-in first-out queue.
//
// The off-chip instruction interface pushes instruction words (push_valid/push_ready); the
// controller pops them in order (pop_valid/pop_ready). A word pushed in one cycle can be popped
// in the next. Storage is a DEPTH x W memory. The paper gives the buffer (2 MB for a 16 x 256
// array) but not its organisation; the FIFO organisation and 128-bit words are this design's.
module instr_buffer #(
  parameter int unsigned W     = 128,
  parameter int unsigned DEPTH = 131072
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push_valid,
  output logic         push_ready,
  input  logic [W-1:0] push_data,
  output logic         pop_valid,
  input  logic         pop_ready,
  output logic [W-1:0] pop_data,
  output logic [$clog2(DEPTH):0] count
);

  localparam int unsigned AB = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AB-1:0] wp, rp;
  logic          do_push, do_pop;

  assign push_ready = (count != DEPTH[AB:0]);
  assign pop_valid  = (count != '0);
  assign pop_data   = mem[rp];
  assign do_push    = push_valid && push_ready;
  assign do_pop     = pop_valid && pop_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_push) wp <= (wp == AB'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == AB'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + (AB+1)'(do_push) - (AB+1)'(do_pop);
    end
  end

  always_ff @(posedge clk)
    if (do_push) mem[wp] <= push_data;

endmodule
