// crossbar: P x P flit switch (switch-traversal stage).
//
// Each output port o copies the flit of input port sel[o] when en[o] is set.
// Combinational; the router registers the outputs. A mux-based crossbar is this
// design's choice; the paper only names the unit.
module crossbar
  import ina_pkg::*;
#(
  parameter int unsigned P = NUM_PORTS
) (
  input  flit_t      in_flit [P],
  input  logic       en      [P],
  input  logic [2:0] sel     [P],
  output logic       out_valid[P],
  output flit_t      out_flit [P]
);
  always_comb begin
    for (int o = 0; o < P; o++) begin
      out_valid[o] = en[o];
      out_flit[o]  = '0;
      for (int p = 0; p < P; p++)
        if (en[o] && (int'(sel[o]) == p)) out_flit[o] = in_flit[p];
    end
  end
endmodule
