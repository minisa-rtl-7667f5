// pe: one FEATHER+ processing element.
//
// The PE holds one stationary Virtual Neuron (VN) of up to AH elements in local registers and
// computes its dot product with a streamed VN that arrives one element per cycle. The local
// registers are double buffered (2 x AH): the controller writes the next tile's VN into the
// shadow bank while the active bank is in use, and `swap` exchanges the two. Each streamed
// element is multiplied with the register of the same element index and accumulated; when the
// element flagged `last` arrives, the finished dot product (one partial-sum element) leaves on
// p_data with p_valid. The streamed element, with its tag, is passed to the PE below one cycle
// later, so a column forms a pipeline in which every PE reuses the same stream.
//
// Interface and timing:
//   ld_we/ld_idx/ld_data  write element ld_idx of the shadow bank (one element per cycle)
//   swap                  exchange active and shadow banks at the clock edge
//   active                this PE's row is in use (row index < VN size); an inactive PE still
//                         forwards the stream but reports no result
//   s_in -> s_out         registered, latency 1
//   p_valid/p_data/p_tag  registered, one cycle after the `last` element arrives
// The AH-element dot product, the 2 x AH registers and the top-to-bottom streaming follow the
// paper. Serial element-per-cycle arrival follows its statement that a VN's elements are
// accessed serially; 8-bit operands with a 32-bit accumulator are this design's choice.
module pe
  import feather_pkg::*;
#(
  parameter int unsigned AH = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  active,
  input  logic                  ld_we,
  input  logic [$clog2(AH)-1:0] ld_idx,
  input  elem_t                 ld_data,
  input  logic                  swap,
  input  strm_t                 s_in,
  output strm_t                 s_out,
  output logic                  p_valid,
  output acc_t                  p_data,
  output stag_t                 p_tag
);

  elem_t regs [2][AH];
  logic  bank;   // active bank
  acc_t  acc;
  acc_t  prod;
  acc_t  acc_next;
  logic [$clog2(AH)-1:0] eidx;

  assign eidx     = s_in.eidx[$clog2(AH)-1:0];
  assign prod     = acc_t'(s_in.data) * acc_t'(regs[bank][eidx]);
  assign acc_next = (s_in.eidx == '0) ? prod : acc + prod;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bank    <= 1'b0;
      acc     <= '0;
      s_out   <= '0;
      p_valid <= 1'b0;
      p_data  <= '0;
      p_tag   <= '0;
      for (int b = 0; b < 2; b++)
        for (int i = 0; i < AH; i++) regs[b][i] <= '0;
    end else begin
      if (swap) bank <= ~bank;
      if (ld_we) regs[~bank][ld_idx] <= ld_data;
      s_out   <= s_in;
      p_valid <= 1'b0;
      if (s_in.valid) begin
        acc <= acc_next;
        if (s_in.last && active) begin
          p_valid <= 1'b1;
          p_data  <= acc_next;
          p_tag   <= s_in.tag;
        end
      end
    end
  end

endmodule
