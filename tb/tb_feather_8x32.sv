// tb_feather_8x32: FEATHER+ in the 8 x 32 array configuration with that configuration's full
// buffer capacities (6.4 MB per operand buffer = 2 halves x 100000 rows x 32 B, 3.2 MB output
// buffer = 25000 rows x 32 banks x 4 B), driven by one MINISA GEMM tile.
//
// O[64 x 256] = I[64 x 8] * W[8 x 256] under WO-S: W is stationary (one 8-element VN per PE,
// all 256 PEs used), I is streamed (every column receives the same input VN, multicast by the
// distribution crossbar). Mapping: G_r = G_c = AW, s_r = 1, s_c = AH, so PE (a_h, a_w) holds
// W column n = AH a_w + a_h, and the output lands at bank a_w, row AH m + a_h.
// The test plays row-addressed off-chip memory (fixed read latency), loads both operands
// (D rows each), runs the tile, commits the output into the stationary buffer, stores the
// buffer and compares all outputs (saturated to int8) with a reference GEMM. It also checks the
// tile, load, store and commit counters and that no conflict was flagged.
module tb_feather_8x32;
  import feather_pkg::*;
  import minisa_enc_pkg::*;

  localparam int unsigned AH   = 8;
  localparam int unsigned AW   = 32;
  localparam int unsigned D    = 100000;
  localparam int unsigned D_OB = 25000;
  localparam int unsigned HBM_LAT = 4;

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
                .IBUF_DEPTH(65536)) dut (
    .clk, .rst_n, .instr_valid, .instr_ready, .instr_data,
    .mem_req_valid, .mem_req_we, .mem_req_addr, .mem_wdata, .mem_rvalid, .mem_rdata,
    .busy, .errs, .perf);

  always #5 clk = ~clk;

  initial begin
    #12000000;
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
        logic any;
        any = 1'b0;
        for (int w = 0; w < AW; w++) begin r[w*8 +: 8] = mem_wdata[w]; any |= (mem_wdata[w] != 0); end
        if (any || hbm.exists(mem_req_addr)) hbm[mem_req_addr] = r;
      end
    end
  end

  task automatic place(input int unsigned base, input int l, input int e, input elem_t v);
    int unsigned a;
    row_t r;
    a = base + (l / AW) * AH + e;
    r = hbm_rd(a);
    r[(l % AW)*8 +: 8] = v;
    hbm[a] = r;
  endtask

  function automatic elem_t peek(input int unsigned a, input int col);
    row_t r;
    r = hbm_rd(a);
    return elem_t'(r[col*8 +: 8]);
  endfunction

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  localparam int M = 64, K = AH, N = AH * AW;
  localparam int unsigned A_W = 0, A_I = 100000, A_O = 200000;
  elem_t Im [M][K];
  elem_t Wm [K][N];

  logic [127:0] prog [$];

  initial begin
    fw_t f;
    int cyc;
    f = widths(AH, AW, D);
    for (int w = 0; w < AW; w++) mem_wdata[w] = '0;
    foreach (Im[m, k]) Im[m][k] = elem_t'(int'($urandom % 7) - 3);
    foreach (Wm[k, n]) Wm[k][n] = elem_t'(int'($urandom % 7) - 3);
    // W: WVN order 010 (X0,R,X1), N_L0 = AH, N_L1 = AW, K_L1 = 1 -> L = AW (n % AH) + n / AH
    foreach (Wm[k, n]) place(A_W, (n % AH) * AW + n / AH, k, Wm[k][n]);
    // I: IVN order 000, M_L0 = 1, M_L1 = 64, J_L1 = 1 -> L = m
    foreach (Im[m, k]) place(A_I, m, k, Im[m][k]);

    prog.push_back(enc_layout(f, 2, 0, 1, 64, AW));    // OVN 000, P_L0 1, P_L1 64, Q_L1 AW
    prog.push_back(enc_mem(0, A_W, 0));
    prog.push_back(enc_mem(0, A_I, 1));
    prog.push_back(enc_layout(f, 0, 2, AH, AW, 1));
    prog.push_back(enc_layout(f, 1, 0, 1, 64, 1));
    prog.push_back(enc_map(f, 0, 0, AW, AW, 1, AH));
    prog.push_back(enc_stream(f, 1, 0, 1, AH, 64));
    prog.push_back(enc_layout(f, 2, 0, 1, 64, AW));    // commit into the stationary buffer
    prog.push_back(enc_mem(1, A_O, 0));

    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    foreach (prog[i]) begin
      instr_valid = 1'b1;
      instr_data  = prog[i];
      @(posedge clk);
      while (!instr_ready) @(posedge clk);
      #1;
    end
    instr_valid = 1'b0;
    cyc = 0;
    while (busy && cyc < 1000000) begin @(posedge clk); cyc++; end
    repeat (5) @(posedge clk);
    check(!busy, "design went idle");
    $display("program finished after about %0d cycles", cyc);

    // output (m, n): OVN L = AW m + n / AH -> bank n / AH, row AH m + n % AH
    for (int m = 0; m < M; m++)
      for (int n = 0; n < N; n++) begin
        int s;
        elem_t e, g;
        s = 0;
        for (int k = 0; k < K; k++) s += int'(Im[m][k]) * int'(Wm[k][n]);
        e = (s > 127) ? 8'sd127 : (s < -128) ? -8'sd128 : elem_t'(s);
        g = peek(A_O + AH * m + n % AH, n / AH);
        check(g == e, $sformatf("O[%0d][%0d] got %0d exp %0d", m, n, g, e));
      end
    check(perf.tiles == 1, "one tile");
    check(perf.loads == 2, "two loads");
    check(perf.stores == 1, "one store");
    check(perf.commits == 1, "one commit");
    check(perf.df_wos_tiles == 1, "WO-S tile");
    check(errs == '0, $sformatf("no conflict flags (errs=%b)", errs));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
