// egg: one BIRRD switch ("EGG"), two inputs a (left) and b (right), two outputs.
//
// Functions, as drawn in the paper's EGG legend:
//   EGG_PASS  (a, b)     EGG_SWAP  (b, a)
//   EGG_ADD_L (a+b, b)   EGG_ADD_R (a, a+b)
// The two adding functions perform the spatial reduction; pass and swap reorder. Purely
// combinational; BIRRD registers between stages. The 2-bit function code is this design's.
module egg
  import feather_pkg::*;
(
  input  egg_fn_e fn,
  input  acc_t    a,
  input  acc_t    b,
  output acc_t    y0,
  output acc_t    y1
);

  always_comb begin
    unique case (fn)
      EGG_SWAP:  begin y0 = b;     y1 = a;     end
      EGG_ADD_L: begin y0 = a + b; y1 = b;     end
      EGG_ADD_R: begin y0 = a;     y1 = a + b; end
      default:   begin y0 = a;     y1 = b;     end
    endcase
  end

endmodule
