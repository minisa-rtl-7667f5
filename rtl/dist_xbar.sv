// dist_xbar: all-to-all distribution crossbar from one buffer row to the NEST columns.
//
// FEATHER+ replaces FEATHER's per-column point-to-point links between the streaming/stationary
// buffers and NEST with two such crossbars, so any element of the row being read can be
// multicast to any number of PE columns. That removes the need to store duplicated copies of a
// VN in the buffer. Output o carries in_row[sel[o]] when en[o] is set and zero otherwise (zero
// is how an out-of-range VN is padded). Purely combinational. The all-to-all function follows
// the paper; the zero-on-disable behaviour is this design's choice.
module dist_xbar
  import feather_pkg::*;
#(
  parameter int unsigned N_IN  = 256,
  parameter int unsigned N_OUT = 256
) (
  input  elem_t                     in_row [N_IN],
  input  logic [$clog2(N_IN)-1:0]   sel    [N_OUT],
  input  logic                      en     [N_OUT],
  output elem_t                     out    [N_OUT]
);

  always_comb begin
    for (int o = 0; o < N_OUT; o++)
      out[o] = en[o] ? in_row[sel[o]] : '0;
  end

endmodule
