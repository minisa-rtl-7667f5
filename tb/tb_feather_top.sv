// tb_feather_top: end-to-end test of FEATHER+ running a two-layer MINISA program
// (AH = 4, AW = 4, D = 64, D_OB = 64).
//
// The test plays off-chip memory (row addressed, one AW-element row per address, read latency
// HBM_LAT, answers in order) and pushes a program that runs two chained GEMM layers:
//   layer 1, WO-S:  O1[16x8]  = I1[16x12] * W1[12x8]   (W1 stationary, I1 streamed), 2 tiles
//   layer 2, IO-S:  O2[16x4]  = O1[16x8]  * W2[8x4]    (O1 stationary, W2 streamed), 2 tiles
// O1 is committed from the output buffer into the stationary buffer, where layer 2 uses it in
// place as its input; O1 and O2 are stored back and compared with a reference GEMM (int8 operands,
// 32-bit sums, saturated to int8 when committed). W2 is loaded while layer 1 still computes.
// The memory images are placed by this file's own layout model (VN (r, x), element e sits at
// row (L / AW) * AH + e, column L mod AW, L enumerated from the order code's loop nest).
//
// Beyond the results the test counts every mechanism it is meant to exercise and fails if one
// never occurs: tiles, loader/streamer overlap, issue stalls, output commits, loads, stores,
// IO-S and WO-S tiles, skipped Activation words, BIRRD reductions (two columns carrying the same
// output into BIRRD in one cycle), output-buffer accumulation across tiles (one output row of a
// bank updated twice between clears), zero padding (streamed VN outside the tensor), and the
// 32-bit counters and error flags the design reports.
module tb_feather_top;
  import feather_pkg::*;
  import minisa_enc_pkg::*;

  localparam int unsigned AH = 4;
  localparam int unsigned AW = 4;
  localparam int unsigned D  = 64;
  localparam int unsigned D_OB = 64;
  localparam int unsigned HBM_LAT = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  logic instr_valid = 1'b0, instr_ready;
  logic [127:0] instr_data = '0;
  logic mem_req_valid, mem_req_we, mem_rvalid;
  logic [31:0] mem_req_addr;
  elem_t mem_wdata [AW], mem_rdata [AW];
  logic busy;
  err_t errs;
  perf_t perf;
  int checks = 0, failures = 0;

  feather_top #(.AH(AH), .AW(AW), .D(D), .D_OB(D_OB), .HBM_AW(32), .INSTR_W(128),
                .IBUF_DEPTH(64)) dut (
    .clk, .rst_n, .instr_valid, .instr_ready, .instr_data,
    .mem_req_valid, .mem_req_we, .mem_req_addr, .mem_wdata, .mem_rvalid, .mem_rdata,
    .busy, .errs, .perf);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // ------------------------------------------------------------ off-chip memory model
  typedef logic [AW*8-1:0] row_t;
  row_t hbm [int unsigned];
  logic        pv [HBM_LAT];
  logic [31:0] pa [HBM_LAT];

  function automatic row_t hbm_rd(input int unsigned a);
    return hbm.exists(a) ? hbm[a] : '0;
  endfunction

  always_comb begin
    row_t r;
    r = hbm_rd(pa[HBM_LAT-1]);
    mem_rvalid = pv[HBM_LAT-1];
    for (int w = 0; w < AW; w++) mem_rdata[w] = elem_t'(r[w*8 +: 8]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < HBM_LAT; i++) begin pv[i] <= 1'b0; pa[i] <= '0; end
    end else begin
      pv[0] <= mem_req_valid && !mem_req_we;
      pa[0] <= mem_req_addr;
      for (int i = 1; i < HBM_LAT; i++) begin pv[i] <= pv[i-1]; pa[i] <= pa[i-1]; end
      if (mem_req_valid && mem_req_we) begin
        row_t r;
        for (int w = 0; w < AW; w++) r[w*8 +: 8] = mem_wdata[w];
        hbm[mem_req_addr] = r;
      end
    end
  end

  // ------------------------------------------------------------ layout model
  // W/I order codes (outermost first): 0 R,X0,X1 1 R,X1,X0 2 X0,R,X1 3 X0,X1,R 4 X1,R,X0 5 X1,X0,R
  // O   order codes (outermost first): 0 X1,X0,R 1 X1,R,X0 2 X0,X1,R 3 X0,R,X1 4 R,X1,X0 5 R,X0,X1
  function automatic int nest_pos(input string ord, input int r, input int x0, input int x1,
                                  input int nr, input int n0, input int n1);
    int v [3], n [3], cnt;
    for (int i = 0; i < 3; i++) begin
      case (ord[i])
        "R": begin v[i] = r;  n[i] = nr; end
        "0": begin v[i] = x0; n[i] = n0; end
        default: begin v[i] = x1; n[i] = n1; end
      endcase
    end
    cnt = 0;
    for (int a = 0; a < n[0]; a++)
      for (int b = 0; b < n[1]; b++)
        for (int c = 0; c < n[2]; c++) begin
          if (a == v[0] && b == v[1] && c == v[2]) return cnt;
          cnt++;
        end
    return -1;
  endfunction

  function automatic string wi_ord(input int code);
    string t [6] = '{"R01", "R10", "0R1", "01R", "1R0", "10R"};
    return t[code];
  endfunction
  function automatic string o_ord(input int code);
    string t [6] = '{"10R", "1R0", "01R", "0R1", "R10", "R01"};
    return t[code];
  endfunction

  // put element e of VN (r, x) at base + buffer position
  task automatic place(input int unsigned base, input int l, input int e, input elem_t v);
    int unsigned a;
    row_t r;
    a = base + (l / AW) * AH + e;
    r = hbm_rd(a);
    r[(l % AW)*8 +: 8] = v;
    hbm[a] = r;
  endtask

  function automatic elem_t peek(input int unsigned base, input int l, input int e);
    row_t r;
    r = hbm_rd(base + (l / AW) * AH + e);
    return elem_t'(r[(l % AW)*8 +: 8]);
  endfunction

  function automatic elem_t sat8(input int v);
    return (v > 127) ? 8'sd127 : (v < -128) ? -8'sd128 : elem_t'(v);
  endfunction

  // ------------------------------------------------------------ tensors
  localparam int M = 16, K1 = 12, N1 = 8, N2 = 4;
  localparam int unsigned A_W1 = 0, A_I1 = 64, A_W2 = 128, A_O1 = 256, A_O2 = 320;
  elem_t I1 [M][K1];
  elem_t W1 [K1][N1];
  elem_t W2 [N1][N2];
  elem_t O1 [M][N1];
  elem_t O2 [M][N2];

  // ------------------------------------------------------------ mechanism monitors
  int n_reduce = 0, n_ob_reacc = 0, n_pad = 0;
  int ob_hits [int];

  always @(posedge clk) if (rst_n) begin
    for (int a = 0; a < AW; a++)
      for (int b = a + 1; b < AW; b++)
        if (dut.oa_valid[a] && dut.oa_valid[b] && dut.oa_bank[a] == dut.oa_bank[b] &&
            dut.oa_row[a] == dut.oa_row[b]) n_reduce++;
    if (dut.ob_clr_en) ob_hits.delete();
    for (int b = 0; b < AW; b++)
      if (dut.br_valid[b]) begin
        int key;
        key = b * 65536 + int'(dut.br_row[b]);
        if (ob_hits.exists(key)) begin ob_hits[key]++; n_ob_reacc++; end
        else ob_hits[key] = 1;
      end
    for (int w = 0; w < AW; w++)
      if (dut.inj[w].valid && !dut.inj[w].tag.mok) n_pad++;
  end

  // ------------------------------------------------------------ program
  logic [127:0] prog [$];

  task automatic push_prog();
    foreach (prog[i]) begin
      instr_valid = 1'b1;
      instr_data  = prog[i];
      @(posedge clk);
      while (!instr_ready) @(posedge clk);
      #1;
    end
    instr_valid = 1'b0;
  endtask

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    fw_t f;
    int cyc;
    f = widths(AH, AW, D);
    for (int w = 0; w < AW; w++) mem_wdata[w] = '0;

    // operands; W1 kept small, I1 up to +-6 so that some O1 sums saturate
    foreach (I1[m, k]) I1[m][k] = elem_t'(int'($urandom % 13) - 6);
    foreach (W1[k, n]) W1[k][n] = elem_t'(int'($urandom % 13) - 6);
    foreach (W2[k, n]) W2[k][n] = elem_t'(int'($urandom % 3) - 1);
    foreach (O1[m, n]) begin
      int s;
      s = 0;
      for (int k = 0; k < K1; k++) s += int'(I1[m][k]) * int'(W1[k][n]);
      O1[m][n] = sat8(s);
    end
    foreach (O2[m, n]) begin
      int s;
      s = 0;
      for (int k = 0; k < N1; k++) s += int'(O1[m][k]) * int'(W2[k][n]);
      O2[m][n] = sat8(s);
    end

    // memory images (VN = 4 elements along the reduction rank; K1 = 12 padded to 4 VNs)
    // W1: WVN order 010 (X0,R,X1), N_L0 = 4, N_L1 = 2, K_L1 = 4
    foreach (W1[k, n])
      place(A_W1, nest_pos(wi_ord(2), k / 4, n % 4, n / 4, 4, 4, 2), k % 4, W1[k][n]);
    // I1: IVN order 100 (X1,R,X0), M_L0 = 2, M_L1 = 8, J_L1 = 4
    foreach (I1[m, k])
      place(A_I1, nest_pos(wi_ord(4), k / 4, m % 2, m / 2, 4, 2, 8), k % 4, I1[m][k]);
    // W2: WVN order 011 (X0,X1,R), N_L0 = 4, N_L1 = 1, K_L1 = 2
    foreach (W2[k, n])
      place(A_W2, nest_pos(wi_ord(3), k / 4, n % 4, n / 4, 2, 4, 1), k % 4, W2[k][n]);

    // layer 1 (WO-S)
    prog.push_back(enc_layout(f, 2, 0, 2, 8, 2));          // O1: 000, P_L0 2, P_L1 8, Q_L1 2
    prog.push_back(enc_mem(0, A_W1, 0));                     // Load W1 -> stationary
    prog.push_back(enc_mem(0, A_I1, 1));                     // Load I1 -> streaming
    prog.push_back(enc_layout(f, 0, 2, 4, 2, 4));          // WVN 010
    prog.push_back(enc_layout(f, 1, 4, 2, 8, 4));          // IVN 100
    prog.push_back(enc_map(f, 0, 0, 2, 2, 1, 4));           // r0 0: K VNs 0,1 reduced in BIRRD
    prog.push_back(enc_stream(f, 1, 0, 1, 4, 16));
    prog.push_back(enc_map(f, 2, 0, 4, 2, 1, 4));           // r0 2: K VNs 2,(3 = padding)
    prog.push_back(enc_stream(f, 1, 0, 2, 4, 9));             // t = 8 runs past M: padded
    prog.push_back(enc_mem(0, A_W2, 1));                     // Load W2 -> streaming (overlaps)
    // layer 2 (IO-S); SetOVN commits O1 into the stationary buffer
    prog.push_back(enc_layout(f, 2, 0, 2, 8, 1));          // O2: 000, P_L0 2, P_L1 8, Q_L1 1
    prog.push_back(enc_mem(1, A_O1, 0));                     // Store O1 (stationary)
    // no SetIVNLayout: the commit of O1 already set the input layout to IVN 101 (2, 8, 2)
    prog.push_back(enc_layout(f, 0, 3, 4, 1, 2));          // WVN 011
    prog.push_back(enc_map(f, 0, 0, 2, 2, 2, 1));
    prog.push_back(enc_stream(f, 0, 0, 1, 4, 4));
    prog.push_back(enc_map(f, 0, 8, 2, 2, 2, 1));
    prog.push_back(enc_stream(f, 0, 0, 1, 4, 4));
    prog.push_back(enc_act());
    prog.push_back(enc_layout(f, 2, 0, 2, 8, 1));          // commit O2 into the streaming buffer
    prog.push_back(enc_mem(1, A_O2, 1));                     // Store O2 (streaming)

    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    push_prog();
    cyc = 0;
    while ((busy || instr_valid) && cyc < 20000) begin @(posedge clk); cyc++; end
    repeat (5) @(posedge clk);
    check(!busy, "design went idle");
    $display("program finished after about %0d cycles", cyc);

    // results
    foreach (O1[m, n]) begin
      elem_t g;
      g = peek(A_O1, nest_pos(o_ord(0), n / 4, m % 2, m / 2, 2, 2, 8), n % 4);
      check(g == O1[m][n], $sformatf("O1[%0d][%0d] got %0d exp %0d", m, n, g, O1[m][n]));
    end
    foreach (O2[m, n]) begin
      elem_t g;
      g = peek(A_O2, nest_pos(o_ord(0), n / 4, m % 2, m / 2, 1, 2, 8), n % 4);
      check(g == O2[m][n], $sformatf("O2[%0d][%0d] got %0d exp %0d", m, n, g, O2[m][n]));
    end

    // mechanisms
    $display("tiles=%0d overlap=%0d issue_stall=%0d commits=%0d loads=%0d stores=%0d ios=%0d wos=%0d nops=%0d",
             perf.tiles, perf.overlap, perf.issue_stall, perf.commits, perf.loads, perf.stores,
             perf.df_ios_tiles, perf.df_wos_tiles, perf.nops);
    $display("birrd_reductions=%0d ob_cross_tile_accumulations=%0d padded_stream_slots=%0d",
             n_reduce, n_ob_reacc, n_pad);
    check(perf.tiles == 4, "four tiles ran");
    check(perf.overlap > 0, "loader overlapped streaming");
    check(perf.issue_stall > 0, "an ExecuteStreaming waited for the loader");
    check(perf.commits == 2, "two output commits");
    check(perf.loads == 3, "three loads");
    check(perf.stores == 2, "two stores");
    check(perf.df_ios_tiles == 2, "two IO-S tiles");
    check(perf.df_wos_tiles == 2, "two WO-S tiles");
    check(perf.nops == 1, "one Activation word skipped");
    check(n_reduce > 0, "BIRRD reduced across columns");
    check(n_ob_reacc > 0, "output buffer accumulated across tiles");
    check(n_pad > 0, "zero-padded streamed VNs");
    check(errs == '0, $sformatf("no conflict flags (errs=%b)", errs));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
