// minisa_ctrl: executes MINISA instructions on the FEATHER+ datapath.
//
// MINISA programs FEATHER+ at Virtual Neuron (VN) granularity, so the controller expands each
// instruction into the per-cycle control that a micro-coded accelerator would otherwise fetch:
// buffer row addresses, crossbar selects, PE register writes and output addresses.
//
//   Set{I,W}VNLayout  latch the input / weight layout (order code and partition factors).
//   ExecuteMapping    latch theta_EM = (r0, c0, G_r, G_c, s_r, s_c).
//   ExecuteStreaming  issue one compute tile with theta_ES = (m0, s_m, T, VN_size, df). The
//                     tile is first given to the stationary loader, which writes the shadow
//                     registers of every active PE: PE (a_h, a_w) gets VN (r, c) with
//                       r = r0 + floor(a_w / G_r),  c = c0 + s_r*a_h + s_c*(a_w mod G_c)
//                     (a weight VN under WO-S, an input VN under IO-S), VN_size^2 cycles, one
//                     buffer row per cycle. The streamer then swaps the PE register banks and
//                     injects, for t in [0, T) and each element e of the VN, into column a_w
//                       j = r0 + floor(a_w / G_r),  m = m0 + s_m*t + floor((a_w mod G_r) / G_c)
//                     (an input VN under WO-S, a weight VN under IO-S). While the streamer runs
//                     tile i the loader already fills the shadow registers for tile i+1.
//   SetOVNLayout      wait until all issued tiles have drained, then sweep the output buffer
//                     row by row (D_OB cycles): if it holds results, copy each row, saturated
//                     to 8 bits, into the same row of the active half of the stationary buffer
//                     (last tile WO-S) or streaming buffer (last tile IO-S); clear each row;
//                     finally latch the new output layout. The same sweep runs once after
//                     reset, so the output buffer starts from zero. A commit also sets the
//                     input layout to the committed output layout (output order code c places
//                     VNs as input code 5 - c), so the next layer may skip SetIVNLayout.
//                     This follows the paper's note that a layer's SetOVNLayout is reused as
//                     the next layer's SetIVNLayout; doing it in hardware is this design's choice.
//   Load / Store      move D rows of AW elements between off-chip memory (row-addressed) and
//                     the shadow half (Load, then swap halves) or active half (Store) of the
//                     target buffer (0 stationary, 1 streaming). A Load's transfer overlaps
//                     running tiles; its half swap waits until they have finished.
//   Activation        decoded and skipped (the paper does not define it).
// A VN of the buffer sits at column L mod AW, rows (L / AW)*AH + e, L being its flattened index.
// VNs outside the tensor are zero-padded. Each buffer is single-banked: all columns must read
// the same row in a cycle. The row needed by the lowest-numbered column is read; a column that
// needs another row gets zero and sets a sticky conflict flag, because such mappings are
// illegal (the mapper must reject them).
//
// The instruction semantics and the mapping/streaming/layout formulas follow the paper. The
// loader/streamer split, the hand-over rule, the drain counter, the DMA sequencing, and the
// behaviour on conflicts are this design's choices.
module minisa_ctrl
  import feather_pkg::*;
#(
  parameter int unsigned AH      = 16,
  parameter int unsigned AW      = 256,
  parameter int unsigned D       = 50000,
  parameter int unsigned D_OB    = 12500,
  parameter int unsigned HBM_AW  = 32,
  parameter int unsigned INSTR_W = 128
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // instruction queue
  input  logic                  ins_valid,
  input  logic [INSTR_W-1:0]    ins_data,
  output logic                  ins_ready,
  // streaming buffer
  output logic [$clog2(D)-1:0]  str_rd_addr,
  output logic [$clog2(D)-1:0]  str_st_addr,
  input  elem_t                 str_st_row [AW],
  output logic                  str_wr_en,
  output logic                  str_wr_shadow,
  output logic [$clog2(D)-1:0]  str_wr_addr,
  output elem_t                 str_wr_row [AW],
  output logic                  str_swap,
  // stationary buffer
  output logic [$clog2(D)-1:0]  sta_rd_addr,
  output logic [$clog2(D)-1:0]  sta_st_addr,
  input  elem_t                 sta_st_row [AW],
  output logic                  sta_wr_en,
  output logic                  sta_wr_shadow,
  output logic [$clog2(D)-1:0]  sta_wr_addr,
  output elem_t                 sta_wr_row [AW],
  output logic                  sta_swap,
  // distribution crossbars
  output logic [$clog2(AW)-1:0] str_sel [AW],
  output logic                  str_en  [AW],
  output logic [$clog2(AW)-1:0] sta_sel [AW],
  output logic                  sta_en  [AW],
  // NEST
  output logic [$clog2(AH):0]   vn_size,
  output logic                  nest_swap,
  output logic                  ld_we,
  output logic [$clog2(AH)-1:0] ld_row,
  output logic [$clog2(AH)-1:0] ld_idx,
  output strm_t                 inj [AW],
  // output side
  output layout_t               lay_o,
  output logic                  ob_clr_en,
  output logic [$clog2(D_OB)-1:0] ob_rd_addr,
  input  acc_t                  ob_rd_row [AW],
  input  logic                  birrd_err,
  // off-chip memory
  output logic                  mem_req_valid,
  output logic                  mem_req_we,
  output logic [HBM_AW-1:0]     mem_req_addr,
  output elem_t                 mem_wdata [AW],
  input  logic                  mem_rvalid,
  input  elem_t                 mem_rdata [AW],
  // status
  output logic                  busy,
  output err_t                  errs,
  output perf_t                 perf
);

  localparam int unsigned LD = $clog2(D);
  localparam int unsigned LO = $clog2(D_OB);
  localparam int unsigned LA = $clog2(AW);
  localparam int unsigned LH = $clog2(AH);
  localparam int unsigned PD_MAX = AH + 2 * LA + 3;

  // ---------------------------------------------------------------- decode
  opcode_e           d_op;
  layout_t           d_lay;
  emap_t             d_em;
  estr_t             d_es;
  logic [HBM_AW-1:0] d_addr;
  logic              d_tgt;

  minisa_decode #(.AH(AH), .AW(AW), .D(D), .HBM_AW(HBM_AW), .INSTR_W(INSTR_W)) u_dec (
    .instr(ins_data), .op(d_op), .lay(d_lay), .em(d_em), .es(d_es),
    .hbm_addr(d_addr), .target(d_tgt)
  );

  // ---------------------------------------------------------------- state
  typedef enum logic [2:0] {
    F_FETCH, F_OVN_WAIT, F_COMMIT, F_LD_XFER, F_LD_WAIT, F_ST_WAIT, F_ST_XFER
  } fstate_e;
  typedef enum logic [1:0] { L_IDLE, L_RUN, L_FULL } lstate_e;
  typedef enum logic [1:0] { S_IDLE, S_RUN, S_DRAIN } sstate_e;

  fstate_e fs;
  lstate_e ls;
  sstate_e ss;

  layout_t lay_i, lay_w, lay_o_next;
  emap_t   em;
  job_t    ld_job, st_job;
  idx_t    l_ah, l_e;          // loader position
  idx_t    s_t, s_e;           // streamer position
  logic [LH:0] s_drain;
  logic [$clog2(PD_MAX+1)-1:0] pdrain;
  logic    dirty;
  dataflow_e df_last;
  logic [HBM_AW-1:0] dma_addr;
  logic    dma_tgt;
  logic [LD:0] cnt_a, cnt_b;

  logic compute_idle;
  assign compute_idle = (ls == L_IDLE) && (ss == S_IDLE) && (pdrain == '0);

  // ---------------------------------------------------------------- loader addressing
  logic [31:0] lrow [AW];
  logic [31:0] lcol [AW];
  logic        lok  [AW];
  logic [31:0] lpick;

  always_comb begin
    for (int w = 0; w < AW; w++) begin
      layout_t     ly;
      logic [31:0] r, c, l, nx;
      ly = (ld_job.es.df == DF_WOS) ? ld_job.lay_w : ld_job.lay_i;
      nx = 32'(ly.x_l0) * 32'(ly.x_l1);
      r  = 32'(ld_job.em.r0) + 32'(w) / 32'(ld_job.em.gr);
      c  = 32'(ld_job.em.c0) + 32'(ld_job.em.sr) * 32'(l_ah)
         + 32'(ld_job.em.sc) * (32'(w) % 32'(ld_job.em.gc));
      l  = flat_wi(ly.order, r, c % 32'(ly.x_l0), c / 32'(ly.x_l0),
                   32'(ly.r_l1), 32'(ly.x_l0), 32'(ly.x_l1));
      lrow[w] = (l / AW) * AH + 32'(l_e);
      lcol[w] = l % AW;
      lok[w]  = (r < 32'(ly.r_l1)) && (c < nx) && (lrow[w] < D);
    end
    lpick = '0;
    for (int w = AW - 1; w >= 0; w--)
      if (lok[w]) lpick = lrow[w];
  end

  // ---------------------------------------------------------------- streamer addressing
  logic [31:0] srow [AW];
  logic [31:0] scol [AW];
  logic        sok  [AW];
  logic [31:0] sm_v [AW];
  logic [31:0] spick;

  always_comb begin
    for (int w = 0; w < AW; w++) begin
      layout_t     ly;
      logic [31:0] j, m, l, nx;
      ly = (st_job.es.df == DF_WOS) ? st_job.lay_i : st_job.lay_w;
      nx = 32'(ly.x_l0) * 32'(ly.x_l1);
      j  = 32'(st_job.em.r0) + 32'(w) / 32'(st_job.em.gr);
      m  = 32'(st_job.es.m0) + 32'(st_job.es.sm) * 32'(s_t)
         + (32'(w) % 32'(st_job.em.gr)) / 32'(st_job.em.gc);
      l  = flat_wi(ly.order, j, m % 32'(ly.x_l0), m / 32'(ly.x_l0),
                   32'(ly.r_l1), 32'(ly.x_l0), 32'(ly.x_l1));
      srow[w] = (l / AW) * AH + 32'(s_e);
      scol[w] = l % AW;
      sok[w]  = (j < 32'(ly.r_l1)) && (m < nx) && (srow[w] < D);
      sm_v[w] = m;
    end
    spick = '0;
    for (int w = AW - 1; w >= 0; w--)
      if (sok[w]) spick = srow[w];
  end

  logic l_active, s_active;
  assign l_active = (ls == L_RUN);
  assign s_active = (ss == S_RUN);

  always_comb begin
    sta_rd_addr = LD'(lpick);
    str_rd_addr = LD'(spick);
    ld_we       = l_active;
    ld_row      = LH'(l_ah);
    ld_idx      = LH'(l_e);
    for (int w = 0; w < AW; w++) begin
      sta_sel[w] = LA'(lcol[w]);
      sta_en[w]  = l_active && lok[w] && (lrow[w] == lpick);
      str_sel[w] = LA'(scol[w]);
      str_en[w]  = s_active && sok[w] && (srow[w] == spick);
      inj[w].valid     = s_active;
      inj[w].last      = s_active && (s_e == st_job.es.vn - 1'b1);
      inj[w].eidx      = 8'(s_e);
      inj[w].data      = '0;
      inj[w].tag.m     = idx_t'(sm_v[w]);
      inj[w].tag.mok   = sok[w];
      inj[w].tag.cbase = idx_t'(32'(st_job.em.c0)
                               + 32'(st_job.em.sc) * (32'(w) % 32'(st_job.em.gc)));
      inj[w].tag.sr    = st_job.em.sr;
      inj[w].tag.df    = st_job.es.df;
    end
  end

  logic l_conf, s_conf;
  always_comb begin
    l_conf = 1'b0;
    s_conf = 1'b0;
    for (int w = 0; w < AW; w++) begin
      l_conf |= l_active && lok[w] && (lrow[w] != lpick);
      s_conf |= s_active && sok[w] && (srow[w] != spick);
    end
  end

  // ---------------------------------------------------------------- issue
  logic take;      // streamer takes the loaded tile
  logic accept;    // an ExecuteStreaming is handed to the loader
  assign take   = (ss == S_IDLE) && (ls == L_FULL);
  assign accept = (fs == F_FETCH) && ins_valid && (d_op == OP_EXEC_STR) && (ls == L_IDLE);

  always_comb begin
    ins_ready = 1'b0;
    if (fs == F_FETCH && ins_valid)
      ins_ready = (d_op == OP_EXEC_STR) ? (ls == L_IDLE) : 1'b1;
  end

  assign nest_swap = take;
  assign busy      = !(fs == F_FETCH && !ins_valid && compute_idle);

  // ---------------------------------------------------------------- data movement
  logic commit_str;   // commit targets the streaming buffer
  assign commit_str = (df_last == DF_IOS);

  always_comb begin
    ob_rd_addr    = LO'(cnt_a);
    ob_clr_en     = 1'b0;
    str_wr_en     = 1'b0;
    sta_wr_en     = 1'b0;
    str_wr_shadow = 1'b0;
    sta_wr_shadow = 1'b0;
    str_wr_addr   = LD'(cnt_a);
    sta_wr_addr   = LD'(cnt_a);
    str_swap      = 1'b0;
    sta_swap      = 1'b0;
    str_st_addr   = LD'(cnt_a);
    sta_st_addr   = LD'(cnt_a);
    mem_req_valid = 1'b0;
    mem_req_we    = 1'b0;
    mem_req_addr  = dma_addr + HBM_AW'(cnt_a);
    for (int w = 0; w < AW; w++) begin
      str_wr_row[w] = elem_t'(sat_to(64'(ob_rd_row[w]), IN_W));
      sta_wr_row[w] = str_wr_row[w];
      mem_wdata[w]  = dma_tgt ? str_st_row[w] : sta_st_row[w];
    end
    unique case (fs)
      F_COMMIT: begin
        ob_clr_en = 1'b1;
        str_wr_en = dirty && commit_str;
        sta_wr_en = dirty && !commit_str;
      end
      F_LD_XFER: begin
        mem_req_valid = (cnt_a < (LD+1)'(D));
        str_wr_addr   = LD'(cnt_b);
        sta_wr_addr   = LD'(cnt_b);
        str_wr_shadow = 1'b1;
        sta_wr_shadow = 1'b1;
        str_wr_en     = mem_rvalid && dma_tgt;
        sta_wr_en     = mem_rvalid && !dma_tgt;
        for (int w = 0; w < AW; w++) begin
          str_wr_row[w] = mem_rdata[w];
          sta_wr_row[w] = mem_rdata[w];
        end
      end
      F_LD_WAIT: if (compute_idle) begin
        str_swap = dma_tgt;
        sta_swap = !dma_tgt;
      end
      F_ST_XFER: begin
        mem_req_valid = 1'b1;
        mem_req_we    = 1'b1;
      end
      default: ;
    endcase
  end

  // ---------------------------------------------------------------- sequential
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fs        <= F_COMMIT;  // sweep-clear the output buffer after reset
      ls        <= L_IDLE;
      ss        <= S_IDLE;
      lay_i     <= '0;
      lay_w     <= '0;
      lay_o     <= '0;
      lay_o_next<= '0;
      em        <= '0;
      ld_job    <= '0;
      st_job    <= '0;
      l_ah      <= '0;
      l_e       <= '0;
      s_t       <= '0;
      s_e       <= '0;
      s_drain   <= '0;
      pdrain    <= '0;
      dirty     <= 1'b0;
      df_last   <= DF_WOS;
      dma_addr  <= '0;
      dma_tgt   <= 1'b0;
      cnt_a     <= '0;
      cnt_b     <= '0;
      vn_size   <= '0;
      errs      <= '0;
      perf      <= '0;
    end else begin
      // ---- instruction issue
      if (fs == F_FETCH && ins_valid) begin
        unique case (d_op)
          OP_SET_WVN:  lay_w <= d_lay;
          OP_SET_IVN:  lay_i <= d_lay;
          OP_EXEC_MAP: em    <= d_em;
          OP_SET_OVN: begin
            lay_o_next <= d_lay;
            fs         <= F_OVN_WAIT;
          end
          OP_EXEC_STR: if (!accept) perf.issue_stall <= perf.issue_stall + 1;
          OP_LOAD: begin
            dma_addr <= d_addr;
            dma_tgt  <= d_tgt;
            cnt_a    <= '0;
            cnt_b    <= '0;
            fs       <= F_LD_XFER;
          end
          OP_STORE: begin
            dma_addr <= d_addr;
            dma_tgt  <= d_tgt;
            cnt_a    <= '0;
            fs       <= F_ST_WAIT;
          end
          default: perf.nops <= perf.nops + 1;
        endcase
      end

      unique case (fs)
        F_OVN_WAIT: if (compute_idle) begin
          cnt_a <= '0;
          fs    <= F_COMMIT;
        end
        F_COMMIT: begin
          if (cnt_a == (LD+1)'(D_OB - 1)) begin
            lay_o <= lay_o_next;
            dirty <= 1'b0;
            if (dirty) begin
              perf.commits <= perf.commits + 1;
              lay_i        <= '{order: (lay_o.order > 3'd5) ? 3'd5 : 3'd5 - lay_o.order,
                                x_l0: lay_o.x_l0, x_l1: lay_o.x_l1, r_l1: lay_o.r_l1};
            end
            fs    <= F_FETCH;
          end
          cnt_a <= cnt_a + 1'b1;
        end
        F_LD_XFER: begin
          if (cnt_a < (LD+1)'(D)) cnt_a <= cnt_a + 1'b1;
          if (mem_rvalid) begin
            cnt_b <= cnt_b + 1'b1;
            if (cnt_b == (LD+1)'(D - 1)) fs <= F_LD_WAIT;
          end
        end
        F_LD_WAIT: if (compute_idle) begin
          perf.loads <= perf.loads + 1;
          fs         <= F_FETCH;
        end
        F_ST_WAIT: if (compute_idle) fs <= F_ST_XFER;
        F_ST_XFER: begin
          cnt_a <= cnt_a + 1'b1;
          if (cnt_a == (LD+1)'(D - 1)) begin
            perf.stores <= perf.stores + 1;
            fs          <= F_FETCH;
          end
        end
        default: ;
      endcase

      // ---- stationary loader
      if (accept) begin
        ld_job  <= '{em: em, es: d_es, lay_i: lay_i, lay_w: lay_w};
        df_last <= d_es.df;
        l_ah    <= '0;
        l_e     <= '0;
        ls      <= L_RUN;
      end else if (ls == L_RUN) begin
        if (ss == S_RUN) perf.overlap <= perf.overlap + 1;
        if (l_e == ld_job.es.vn - 1'b1) begin
          l_e <= '0;
          if (l_ah == ld_job.es.vn - 1'b1) ls <= L_FULL;
          else l_ah <= l_ah + 1'b1;
        end else begin
          l_e <= l_e + 1'b1;
        end
      end else if (take) begin
        ls <= L_IDLE;
      end

      // ---- streamer
      unique case (ss)
        S_IDLE: if (take) begin
          st_job    <= ld_job;
          vn_size   <= (LH+1)'(ld_job.es.vn);
          s_t       <= '0;
          s_e       <= '0;
          dirty     <= 1'b1;
          ss        <= S_RUN;
          perf.tiles <= perf.tiles + 1;
          if (ld_job.es.df == DF_IOS) perf.df_ios_tiles <= perf.df_ios_tiles + 1;
          else                        perf.df_wos_tiles <= perf.df_wos_tiles + 1;
        end
        S_RUN: begin
          if (s_e == st_job.es.vn - 1'b1) begin
            s_e <= '0;
            if (s_t == st_job.es.t - 1'b1) begin
              s_drain <= (LH+1)'(AH);
              ss      <= S_DRAIN;
            end else begin
              s_t <= s_t + 1'b1;
            end
          end else begin
            s_e <= s_e + 1'b1;
          end
        end
        S_DRAIN: begin
          if (s_drain == '0) ss <= S_IDLE;
          else s_drain <= s_drain - 1'b1;
        end
        default: ;
      endcase

      if (ss != S_IDLE) pdrain <= ($bits(pdrain))'(PD_MAX);
      else if (pdrain != '0) pdrain <= pdrain - 1'b1;

      // ---- sticky errors
      if (l_conf)    errs.sta_conflict   <= 1'b1;
      if (s_conf)    errs.str_conflict   <= 1'b1;
      if (birrd_err) errs.birrd_conflict <= 1'b1;
    end
  end

  // Rules of the instruction handshake.
  a_pop_only_valid: assert property (@(posedge clk) disable iff (!rst_n) ins_ready |-> ins_valid);
  a_one_owner:      assert property (@(posedge clk) disable iff (!rst_n) !(take && accept));

endmodule
