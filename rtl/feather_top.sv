// feather_top: FEATHER+ driven by MINISA instructions.
//
// FEATHER+ is a reconfigurable GEMM accelerator built around NEST, an AH x AW array of PEs
// that each compute an AH-element dot product. The operands sit in a streaming buffer and a
// stationary buffer (both D x AW, ping/pong). Two all-to-all crossbars distribute buffer rows to
// the NEST columns: the stationary one fills the PE registers, the streaming one feeds the
// column tops. Each column's partial sums go through BIRRD, which reduces across columns and
// reorders them to the banks of the output buffer, which in turn accumulates over time. The
// output buffer can be committed back into either operand buffer so that a layer's output
// becomes the next layer's input, stationary or streamed.
//
// Instructions arrive on a push port into the instruction buffer; the MINISA controller turns
// them into all per-cycle control. Off-chip memory is outside the design: its request port is
// brought out (one AW-element row per address, reads answered in order with mem_rvalid, no
// back-pressure).
//
// Block structure and connections follow the paper's FEATHER+ figure; the parameter defaults
// are its 16 x 256 configuration with its stated capacities: 25.6 MB per operand buffer
// (ping/pong halves of D = 50000 rows x 256 bytes), 12.8 MB of output buffer (D_OB = 12500 rows
// x 256 banks x 4 bytes) and a 2 MB instruction buffer. Interface protocols are this design's choice.
module feather_top
  import feather_pkg::*;
#(
  parameter int unsigned AH         = 16,
  parameter int unsigned AW         = 256,
  parameter int unsigned D          = 50000,
  parameter int unsigned D_OB       = 12500,
  parameter int unsigned HBM_AW     = 32,
  parameter int unsigned INSTR_W    = 128,
  parameter int unsigned IBUF_DEPTH = 131072
) (
  input  logic               clk,
  input  logic               rst_n,
  // instruction push port
  input  logic               instr_valid,
  output logic               instr_ready,
  input  logic [INSTR_W-1:0] instr_data,
  // off-chip memory
  output logic               mem_req_valid,
  output logic               mem_req_we,
  output logic [HBM_AW-1:0]  mem_req_addr,
  output elem_t              mem_wdata [AW],
  input  logic               mem_rvalid,
  input  elem_t              mem_rdata [AW],
  // status
  output logic               busy,
  output err_t               errs,
  output perf_t              perf
);

  localparam int unsigned LD = $clog2(D);
  localparam int unsigned LO = $clog2(D_OB);
  localparam int unsigned LA = $clog2(AW);
  localparam int unsigned LH = $clog2(AH);

  // instruction buffer
  logic               ins_valid, ins_ready;
  logic [INSTR_W-1:0] ins_data;

  instr_buffer #(.W(INSTR_W), .DEPTH(IBUF_DEPTH)) u_ibuf (
    .clk, .rst_n,
    .push_valid(instr_valid), .push_ready(instr_ready), .push_data(instr_data),
    .pop_valid(ins_valid), .pop_ready(ins_ready), .pop_data(ins_data),
    .count()
  );

  // buffers
  logic [LD-1:0] str_rd_addr, str_st_addr, str_wr_addr;
  logic [LD-1:0] sta_rd_addr, sta_st_addr, sta_wr_addr;
  logic          str_wr_en, str_wr_shadow, str_swap;
  logic          sta_wr_en, sta_wr_shadow, sta_swap;
  elem_t         str_rd_row [AW], str_st_row [AW], str_wr_row [AW];
  elem_t         sta_rd_row [AW], sta_st_row [AW], sta_wr_row [AW];

  vn_buffer #(.AW(AW), .D(D)) u_str_buf (
    .clk, .rst_n,
    .rd_addr(str_rd_addr), .rd_row(str_rd_row),
    .st_addr(str_st_addr), .st_row(str_st_row),
    .wr_en(str_wr_en), .wr_shadow(str_wr_shadow), .wr_addr(str_wr_addr), .wr_row(str_wr_row),
    .swap(str_swap), .active_half()
  );

  vn_buffer #(.AW(AW), .D(D)) u_sta_buf (
    .clk, .rst_n,
    .rd_addr(sta_rd_addr), .rd_row(sta_rd_row),
    .st_addr(sta_st_addr), .st_row(sta_st_row),
    .wr_en(sta_wr_en), .wr_shadow(sta_wr_shadow), .wr_addr(sta_wr_addr), .wr_row(sta_wr_row),
    .swap(sta_swap), .active_half()
  );

  // distribution crossbars
  logic [LA-1:0] str_sel [AW], sta_sel [AW];
  logic          str_en  [AW], sta_en  [AW];
  elem_t         str_x   [AW], sta_x   [AW];

  dist_xbar #(.N_IN(AW), .N_OUT(AW)) u_str_xbar (
    .in_row(str_rd_row), .sel(str_sel), .en(str_en), .out(str_x));
  dist_xbar #(.N_IN(AW), .N_OUT(AW)) u_sta_xbar (
    .in_row(sta_rd_row), .sel(sta_sel), .en(sta_en), .out(sta_x));

  // controller
  logic [LH:0]   vn_size;
  logic          nest_swap, ld_we;
  logic [LH-1:0] ld_row, ld_idx;
  strm_t         inj [AW], s_in [AW];
  layout_t       lay_o;
  logic          ob_clr_en, birrd_err;
  logic [LO-1:0] ob_rd_addr;
  acc_t          ob_rd_row [AW];

  minisa_ctrl #(.AH(AH), .AW(AW), .D(D), .D_OB(D_OB), .HBM_AW(HBM_AW), .INSTR_W(INSTR_W)) u_ctrl (
    .clk, .rst_n,
    .ins_valid, .ins_data, .ins_ready,
    .str_rd_addr, .str_st_addr, .str_st_row, .str_wr_en, .str_wr_shadow, .str_wr_addr,
    .str_wr_row, .str_swap,
    .sta_rd_addr, .sta_st_addr, .sta_st_row, .sta_wr_en, .sta_wr_shadow, .sta_wr_addr,
    .sta_wr_row, .sta_swap,
    .str_sel, .str_en, .sta_sel, .sta_en,
    .vn_size, .nest_swap, .ld_we, .ld_row, .ld_idx, .inj,
    .lay_o, .ob_clr_en, .ob_rd_addr, .ob_rd_row, .birrd_err,
    .mem_req_valid, .mem_req_we, .mem_req_addr, .mem_wdata, .mem_rvalid, .mem_rdata,
    .busy, .errs, .perf
  );

  always_comb
    for (int w = 0; w < AW; w++) begin
      s_in[w]      = inj[w];
      s_in[w].data = str_x[w];
    end

  // NEST
  logic          col_valid [AW];
  acc_t          col_data  [AW];
  stag_t         col_tag   [AW];
  logic [LH-1:0] col_row   [AW];

  nest #(.AH(AH), .AW(AW)) u_nest (
    .clk, .rst_n, .vn_size,
    .ld_we, .ld_row, .ld_idx, .ld_data(sta_x), .swap(nest_swap),
    .s_in, .col_valid, .col_data, .col_tag, .col_row
  );

  // output addressing, BIRRD, output buffer
  logic          oa_valid [AW];
  logic [LA-1:0] oa_bank  [AW];
  logic [LO-1:0] oa_row   [AW];

  ovn_addr_gen #(.AH(AH), .AW(AW), .D(D_OB)) u_oag (
    .lay_o, .col_valid, .col_row, .col_tag,
    .o_valid(oa_valid), .o_bank(oa_bank), .o_row(oa_row)
  );

  logic          br_valid [AW];
  logic [LO-1:0] br_row   [AW];
  acc_t          br_data  [AW];

  birrd #(.AW(AW), .ROW_W(LO)) u_birrd (
    .clk, .rst_n,
    .in_valid(oa_valid), .in_bank(oa_bank), .in_row(oa_row), .in_data(col_data),
    .out_valid(br_valid), .out_row(br_row), .out_data(br_data), .err(birrd_err)
  );

  out_buffer #(.AW(AW), .D(D_OB)) u_ob (
    .clk, .clr_en(ob_clr_en), .clr_row(ob_rd_addr),
    .acc_valid(br_valid), .acc_row(br_row), .acc_data(br_data),
    .rd_addr(ob_rd_addr), .rd_row(ob_rd_row)
  );

endmodule
