// minisa_decode: splits a MINISA instruction word into its fields.
//
// Field widths follow the paper's instruction tables for an AH x AW NEST with buffer depth D
// (VR = ceil(log2(D/AH)), WL = ceil(log2(AW)), RC = ceil(log2(D/AH * AW))):
//   Set{W,I,O}VNLayout: opcode 3 | order 3 | X_L0 WL | X_L1 VR | R_L1 VR
//       (X = N, M, P and R = K, J, Q for the weight, input and output layout)
//   ExecuteMapping    : opcode 3 | G_r WL | G_c WL | r0 RC | c0 RC | s_r VR | s_c VR
//   ExecuteStreaming  : opcode 3 | df 1 | m0 VR-1 | s_m VR-1 | VN_size log2(AH) | T VR
//   Load / Store      : opcode 3 | HBM address HBM_AW | target 1 (0 stationary, 1 streaming)
// Counts that cannot be zero (partition factors, G_r, G_c, VN_size, T) are encoded as value-1,
// as the paper states; offsets and strides (r0, c0, s_r, s_c, m0, s_m) are plain values because
// the paper's own examples use zero for them. Fields are packed from bit 0 upward in the order
// listed; the paper does not fix bit positions. Any field narrower than one bit is widened to
// one. Purely combinational.
module minisa_decode
  import feather_pkg::*;
#(
  parameter int unsigned AH      = 16,
  parameter int unsigned AW      = 256,
  parameter int unsigned D       = 50000,
  parameter int unsigned HBM_AW  = 32,
  parameter int unsigned INSTR_W = 128
) (
  input  logic [INSTR_W-1:0] instr,
  output opcode_e            op,
  output layout_t            lay,
  output emap_t              em,
  output estr_t              es,
  output logic [HBM_AW-1:0]  hbm_addr,
  output logic               target
);

  function automatic int unsigned atleast1(input int unsigned v);
    return (v < 1) ? 1 : v;
  endfunction

  localparam int unsigned WL = atleast1($clog2(AW));
  localparam int unsigned VR = atleast1($clog2(D / AH));
  localparam int unsigned RC = atleast1($clog2((D / AH) * AW));
  localparam int unsigned MS = atleast1($clog2(D / AH) - 1);
  localparam int unsigned VS = atleast1($clog2(AH));

  // Layout field offsets
  localparam int unsigned L_ORD = 3;
  localparam int unsigned L_X0  = L_ORD + 3;
  localparam int unsigned L_X1  = L_X0 + WL;
  localparam int unsigned L_R1  = L_X1 + VR;
  // ExecuteMapping
  localparam int unsigned M_GR  = 3;
  localparam int unsigned M_GC  = M_GR + WL;
  localparam int unsigned M_R0  = M_GC + WL;
  localparam int unsigned M_C0  = M_R0 + RC;
  localparam int unsigned M_SR  = M_C0 + RC;
  localparam int unsigned M_SC  = M_SR + VR;
  // ExecuteStreaming
  localparam int unsigned S_DF  = 3;
  localparam int unsigned S_M0  = S_DF + 1;
  localparam int unsigned S_SM  = S_M0 + MS;
  localparam int unsigned S_VN  = S_SM + MS;
  localparam int unsigned S_T   = S_VN + VS;
  // Load / Store
  localparam int unsigned D_AD  = 3;
  localparam int unsigned D_TG  = D_AD + HBM_AW;

  function automatic idx_t fld(input logic [INSTR_W-1:0] w, input int unsigned lsb,
                               input int unsigned width);
    logic [INSTR_W-1:0] v;
    v = (w >> lsb) & ((INSTR_W'(1) << width) - INSTR_W'(1));
    return idx_t'(v);
  endfunction

  always_comb begin
    op        = opcode_e'(instr[2:0]);
    lay.order = instr[L_ORD +: 3];
    lay.x_l0  = fld(instr, L_X0, WL) + 1'b1;
    lay.x_l1  = fld(instr, L_X1, VR) + 1'b1;
    lay.r_l1  = fld(instr, L_R1, VR) + 1'b1;
    em.gr     = fld(instr, M_GR, WL) + 1'b1;
    em.gc     = fld(instr, M_GC, WL) + 1'b1;
    em.r0     = fld(instr, M_R0, RC);
    em.c0     = fld(instr, M_C0, RC);
    em.sr     = fld(instr, M_SR, VR);
    em.sc     = fld(instr, M_SC, VR);
    es.df     = dataflow_e'(instr[S_DF]);
    es.m0     = fld(instr, S_M0, MS);
    es.sm     = fld(instr, S_SM, MS);
    es.vn     = fld(instr, S_VN, VS) + 1'b1;
    es.t      = fld(instr, S_T, VR) + 1'b1;
    hbm_addr  = instr[D_AD +: HBM_AW];
    target    = instr[D_TG];
  end

endmodule
