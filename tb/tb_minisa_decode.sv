// tb_minisa_decode: self-checking test of the MINISA decoder (AH = 4, AW = 4, D = 64).
//
// Random instructions of every kind are built with the testbench encoder from random field
// values covering each field's full range; the decoded opcode and fields (counts restored by
// adding one) must equal the values encoded. Combinational: checked one delta later.
module tb_minisa_decode;
  import feather_pkg::*;
  import minisa_enc_pkg::*;

  localparam int unsigned AH = 4;
  localparam int unsigned AW = 4;
  localparam int unsigned D  = 64;

  logic [127:0] instr = '0;
  opcode_e op;
  layout_t lay;
  emap_t   em;
  estr_t   es;
  logic [31:0] hbm_addr;
  logic    target;
  int      checks = 0, failures = 0;

  minisa_decode #(.AH(AH), .AW(AW), .D(D), .HBM_AW(32), .INSTR_W(128)) dut (
    .instr, .op, .lay, .em, .es, .hbm_addr, .target);

  initial begin
    #500000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $display("watchdog expired");
    $finish;
  end

  task automatic check(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got=%0d exp=%0d", what, got, exp); end
  endtask

  initial begin
    fw_t f;
    f = widths(AH, AW, D);
    for (int it = 0; it < 600; it++) begin
      int kind;
      kind = it % 6;
      case (kind)
        0, 1, 2: begin
          int o, x0, x1, r1;
          o = $urandom % 8; x0 = 1 + $urandom % (1 << f.wl);
          x1 = 1 + $urandom % (1 << f.vr); r1 = 1 + $urandom % (1 << f.vr);
          instr = enc_layout(f, kind, o, x0, x1, r1);
          #1;
          check(op, kind, "layout opcode");
          check(lay.order, o, "order"); check(lay.x_l0, x0, "x_l0");
          check(lay.x_l1, x1, "x_l1"); check(lay.r_l1, r1, "r_l1");
        end
        3: begin
          int r0, c0, gr, gc, sr, sc;
          r0 = $urandom % (1 << f.rc); c0 = $urandom % (1 << f.rc);
          gr = 1 + $urandom % (1 << f.wl); gc = 1 + $urandom % (1 << f.wl);
          sr = $urandom % (1 << f.vr); sc = $urandom % (1 << f.vr);
          instr = enc_map(f, r0, c0, gr, gc, sr, sc);
          #1;
          check(op, OP_EXEC_MAP, "map opcode");
          check(em.r0, r0, "r0"); check(em.c0, c0, "c0"); check(em.gr, gr, "G_r");
          check(em.gc, gc, "G_c"); check(em.sr, sr, "s_r"); check(em.sc, sc, "s_c");
        end
        4: begin
          int df, m0, sm, vn, t;
          df = $urandom % 2; m0 = $urandom % (1 << f.ms); sm = $urandom % (1 << f.ms);
          vn = 1 + $urandom % (1 << f.vs); t = 1 + $urandom % (1 << f.vr);
          instr = enc_stream(f, df, m0, sm, vn, t);
          #1;
          check(op, OP_EXEC_STR, "stream opcode");
          check(es.df, df, "df"); check(es.m0, m0, "m0"); check(es.sm, sm, "s_m");
          check(es.vn, vn, "VN_size"); check(es.t, t, "T");
        end
        default: begin
          bit st;
          int unsigned a;
          int tg;
          st = $urandom % 2; a = $urandom; tg = $urandom % 2;
          instr = (it % 12 == 5) ? enc_act() : enc_mem(st, a, tg);
          #1;
          if (it % 12 == 5) check(op, OP_ACT, "activation opcode");
          else begin
            check(op, st ? OP_STORE : OP_LOAD, "mem opcode");
            check(hbm_addr, a, "address"); check(target, tg, "target");
          end
        end
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
