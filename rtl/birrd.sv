// birrd: BIRRD, the reorder-in-reduction network between NEST and the output buffer.
//
// Each NEST column delivers at most one partial sum per cycle, tagged with the output-buffer
// bank and row it belongs to. BIRRD adds partial sums that belong to the same output element
// (spatial reduction across PE columns) and steers every result to the bank that owns its
// address, so that the output layout can be changed while reducing.
//
// Structure: 2*log2(AW) stages of AW/2 EGG switches, a register after every stage. Stage s
// pairs positions that differ in bit s for the first log2(AW) stages and in bit
// 2*log2(AW)-1-s for the rest (a butterfly followed by a reversed butterfly). Each EGG chooses
// its function from the tags of its two inputs:
//   * both valid with equal (bank, row): add; in the first half the sum goes left, in the
//     second half to the side given by the destination bank's bit for that stage;
//   * otherwise, first half: pass; second half: send each value to the side its destination
//     bit asks for (destination-tag routing).
// The first half therefore folds groups of columns into one value early (for groups of
// columns congruent modulo a power of two it is a full reduction tree), and the second half
// delivers each value to its bank. A value that two inputs want on the same side, or that
// arrives at a position other than its bank, is dropped and flagged on `err` (the mapper must
// pick layouts free of such output-port conflicts).
//
// Latency: 2*log2(AW) cycles, one result per bank per cycle. The stage count 2*log2(AW) and
// the four EGG functions follow the paper's figure (it draws the 4-column case with 3 stages;
// this design uses 4 there too); the inter-stage wiring and the tag-driven switch setting are
// this design's own, the paper does not give them.
module birrd
  import feather_pkg::*;
#(
  parameter int unsigned AW    = 256,
  parameter int unsigned ROW_W = 6
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid [AW],
  input  logic [$clog2(AW)-1:0] in_bank  [AW],
  input  logic [ROW_W-1:0]      in_row   [AW],
  input  acc_t                  in_data  [AW],
  output logic                  out_valid [AW],
  output logic [ROW_W-1:0]      out_row   [AW],
  output acc_t                  out_data  [AW],
  output logic                  err
);

  localparam int unsigned LG = $clog2(AW);
  localparam int unsigned NS = 2 * LG;

  typedef struct packed {
    logic                  v;
    logic [LG-1:0]         bank;
    logic [ROW_W-1:0]      row;
  } tag_t;

  tag_t tg [NS+1][AW];
  acc_t dt [NS+1][AW];
  logic conf [NS][AW/2];

  always_comb
    for (int i = 0; i < AW; i++) begin
      tg[0][i] = '{v: in_valid[i], bank: in_bank[i], row: in_row[i]};
      dt[0][i] = in_data[i];
    end

  for (genvar s = 0; s < NS; s++) begin : g_stage
    localparam int unsigned BIT = (s < LG) ? s : (NS - 1 - s);
    for (genvar k = 0; k < AW / 2; k++) begin : g_egg
      // lo = k with a 0 inserted at bit BIT, hi = lo with that bit set
      localparam int unsigned LO = ((k >> BIT) << (BIT + 1)) | (k & ((1 << BIT) - 1));
      localparam int unsigned HI = LO | (1 << BIT);
      tag_t    a_t, b_t, y0_t, y1_t;
      acc_t    y0, y1;
      egg_fn_e fn;
      logic    same, a_w1, b_w1;

      assign a_t  = tg[s][LO];
      assign b_t  = tg[s][HI];
      assign same = a_t.v && b_t.v && (a_t.bank == b_t.bank) && (a_t.row == b_t.row);
      assign a_w1 = a_t.bank[BIT];
      assign b_w1 = b_t.bank[BIT];

      always_comb begin
        fn        = EGG_PASS;
        y0_t      = a_t;
        y1_t      = b_t;
        conf[s][k] = 1'b0;
        if (same) begin
          if (s >= LG && a_w1) begin
            fn   = EGG_ADD_R;
            y0_t = '0;
            y1_t = b_t;
          end else begin
            fn   = EGG_ADD_L;
            y0_t = a_t;
            y1_t = '0;
          end
        end else if (s >= LG) begin
          if (a_t.v && b_t.v) begin
            if (a_w1 && !b_w1) begin
              fn = EGG_SWAP; y0_t = b_t; y1_t = a_t;
            end else if (a_w1 == b_w1) begin
              conf[s][k] = 1'b1;  // both want one side: keep order, mark the loser invalid
              if (a_w1) y0_t = '0; else y1_t = '0;
            end
          end else if (a_t.v && a_w1) begin
            fn = EGG_SWAP; y0_t = b_t; y1_t = a_t;
          end else if (b_t.v && !b_w1) begin
            fn = EGG_SWAP; y0_t = b_t; y1_t = a_t;
          end
        end
      end

      egg u_egg (.fn(fn), .a(dt[s][LO]), .b(dt[s][HI]), .y0(y0), .y1(y1));

      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          tg[s+1][LO] <= '0;
          tg[s+1][HI] <= '0;
          dt[s+1][LO] <= '0;
          dt[s+1][HI] <= '0;
        end else begin
          tg[s+1][LO] <= y0_t;
          tg[s+1][HI] <= y1_t;
          dt[s+1][LO] <= y0;
          dt[s+1][HI] <= y1;
        end
      end
    end
  end

  logic any_conf, misroute;
  always_comb begin
    any_conf = 1'b0;
    misroute = 1'b0;
    for (int s = 0; s < NS; s++)
      for (int k = 0; k < AW / 2; k++) any_conf |= conf[s][k];
    for (int i = 0; i < AW; i++) begin
      out_valid[i] = tg[NS][i].v && (tg[NS][i].bank == LG'(i));
      out_row[i]   = tg[NS][i].row;
      out_data[i]  = dt[NS][i];
      misroute    |= tg[NS][i].v && (tg[NS][i].bank != LG'(i));
    end
  end

  assign err = any_conf || misroute;

endmodule
