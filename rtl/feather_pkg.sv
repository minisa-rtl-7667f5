// feather_pkg: types, opcodes and address arithmetic shared by the FEATHER+ datapath
// and its MINISA controller.
//
// FEATHER+ programs its buffers at Virtual Neuron (VN) granularity. A VN is a group of
// consecutive elements along the reduction rank that one PE consumes in one dot product.
// A layout places a two-rank tensor of VNs into a D x AW buffer: the non-reduction rank X is
// split into X_L0 and X_L1, the reduction rank is already grouped into VNs (index R_L1), and a
// 3-bit order code picks the loop nest over {R_L1, X_L0, X_L1}. The flattened VN index L then
// sits at buffer column L mod AW and occupies AH element rows starting at row (L / AW) * AH.
//
// The opcodes and order codes follow the published instruction tables. Instruction field
// packing (opcode in the low bits, fields upward in table order) is this design's choice.
package feather_pkg;

  // 3-bit MINISA opcodes as printed in the instruction tables.
  typedef enum logic [2:0] {
    OP_SET_WVN  = 3'b000,
    OP_SET_IVN  = 3'b001,
    OP_SET_OVN  = 3'b010,
    OP_EXEC_STR = 3'b011,
    OP_STORE    = 3'b100,
    OP_LOAD     = 3'b101,
    OP_ACT      = 3'b110,  // Activation: no encoding published, decoded as no-op
    OP_EXEC_MAP = 3'b111
  } opcode_e;

  // ExecuteStreaming dataflow bit: 0 = IO-S, 1 = WO-S.
  typedef enum logic {
    DF_IOS = 1'b0,
    DF_WOS = 1'b1
  } dataflow_e;

  // BIRRD switch (EGG) functions.
  typedef enum logic [1:0] {
    EGG_PASS    = 2'd0,  // (a, b)
    EGG_SWAP    = 2'd1,  // (b, a)
    EGG_ADD_L   = 2'd2,  // (a+b, b)
    EGG_ADD_R   = 2'd3   // (a, a+b)
  } egg_fn_e;

  // Element widths: 8-bit signed operands, 32-bit accumulation.
  localparam int unsigned IN_W  = 8;
  localparam int unsigned ACC_W = 32;
  typedef logic signed [IN_W-1:0]  elem_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  // Decoded index fields are carried at one fixed width.
  localparam int unsigned IDX_W = 24;
  typedef logic [IDX_W-1:0] idx_t;

  // Tag that travels down a NEST column with every streamed element. It tells the output
  // side which output element the resulting dot product belongs to:
  //   m     : streamed VN's non-reduction index (m under WO-S, n under IO-S)
  //   mok   : streamed VN lies inside the tensor (else it was zero-padded)
  //   cbase : stationary index of row 0 of this column, c0 + s_c * (a_w mod G_c)
  //   sr    : stationary index step per PE row
  //   df    : dataflow of the tile
  typedef struct packed {
    idx_t      m;
    logic      mok;
    idx_t      cbase;
    idx_t      sr;
    dataflow_e df;
  } stag_t;

  // One streamed element entering a PE: element eidx of a VN, last marks the VN's end.
  typedef struct packed {
    logic       valid;
    logic       last;
    logic [7:0] eidx;
    elem_t      data;
    stag_t      tag;
  } strm_t;

  // A VN layout: order code and the three partition factors (already decoded, >= 1).
  //   x_l0 / x_l1: level-0 / level-1 factor of the non-reduction rank (N, M or P)
  //   r_l1       : number of VNs along the reduction rank (K_L1, J_L1 or Q_L1)
  typedef struct packed {
    logic [2:0] order;
    idx_t       x_l0;
    idx_t       x_l1;
    idx_t       r_l1;
  } layout_t;

  // ExecuteMapping parameters theta_EM.
  typedef struct packed {
    idx_t r0;
    idx_t c0;
    idx_t gr;
    idx_t gc;
    idx_t sr;
    idx_t sc;
  } emap_t;

  // ExecuteStreaming parameters theta_ES.
  typedef struct packed {
    idx_t      m0;
    idx_t      sm;
    idx_t      t;
    idx_t      vn;
    dataflow_e df;
  } estr_t;

  // A compute tile handed from instruction issue to the stationary loader and then to the
  // streamer: the mapping and streaming parameters plus the operand layouts at issue time.
  typedef struct packed {
    emap_t   em;
    estr_t   es;
    layout_t lay_i;
    layout_t lay_w;
  } job_t;

  // Sticky error flags: a buffer row conflict (the mapping needs two rows of a single-bank
  // buffer in one cycle) or an output-port conflict in BIRRD.
  typedef struct packed {
    logic str_conflict;
    logic sta_conflict;
    logic birrd_conflict;
  } err_t;

  // Event counters.
  typedef struct packed {
    logic [31:0] tiles;          // compute tiles started
    logic [31:0] overlap;        // cycles the loader filled shadow registers during streaming
    logic [31:0] issue_stall;    // cycles an ExecuteStreaming waited for the loader
    logic [31:0] commits;        // output tiles committed to an operand buffer
    logic [31:0] loads;          // Load instructions completed
    logic [31:0] stores;         // Store instructions completed
    logic [31:0] df_ios_tiles;   // tiles run under IO-S
    logic [31:0] df_wos_tiles;   // tiles run under WO-S
    logic [31:0] nops;           // Activation words skipped
  } perf_t;

  // Flatten a VN index for the weight/input tables (WVN and IVN share one code table):
  //   000 R,X0,X1  001 R,X1,X0  010 X0,R,X1  011 X0,X1,R  100 X1,R,X0  101 X1,X0,R
  // (outermost first). Codes 110/111 are reserved and flatten like 000.
  function automatic logic [31:0] flat_wi(input logic [2:0] order,
                                          input logic [31:0] r, x0, x1,
                                          input logic [31:0] nr, nx0, nx1);
    case (order)
      3'b001:  return r  * nx1 * nx0 + x1 * nx0 + x0;
      3'b010:  return x0 * nr  * nx1 + r  * nx1 + x1;
      3'b011:  return x0 * nx1 * nr  + x1 * nr  + r;
      3'b100:  return x1 * nr  * nx0 + r  * nx0 + x0;
      3'b101:  return x1 * nx0 * nr  + x0 * nr  + r;
      default: return r  * nx0 * nx1 + x0 * nx1 + x1;
    endcase
  endfunction

  // Flatten an OVN index (own code table, X1 = p_L1, X0 = p_L0, R = q_L1):
  //   000 X1,X0,R  001 X1,R,X0  010 X0,X1,R  011 X0,R,X1  100 R,X1,X0  101 R,X0,X1
  function automatic logic [31:0] flat_o(input logic [2:0] order,
                                         input logic [31:0] r, x0, x1,
                                         input logic [31:0] nr, nx0, nx1);
    case (order)
      3'b001:  return x1 * nr  * nx0 + r  * nx0 + x0;
      3'b010:  return x0 * nx1 * nr  + x1 * nr  + r;
      3'b011:  return x0 * nr  * nx1 + r  * nx1 + x1;
      3'b100:  return r  * nx1 * nx0 + x1 * nx0 + x0;
      3'b101:  return r  * nx0 * nx1 + x0 * nx1 + x1;
      default: return x1 * nx0 * nr  + x0 * nr  + r;
    endcase
  endfunction

  // Saturate an accumulator value to a signed IN_W-bit operand (used when outputs are
  // committed back into an operand buffer).
  function automatic logic [31:0] sat_to(input logic signed [63:0] v, input int unsigned w);
    logic signed [63:0] hi, lo;
    hi = (64'sd1 <<< (w - 1)) - 64'sd1;
    lo = -(64'sd1 <<< (w - 1));
    if (v > hi)      return 32'(hi);
    else if (v < lo) return 32'(lo);
    else             return 32'(v);
  endfunction

endpackage
