// payload_generator: writes the local payload into a gather flit.
//
// When `load` is set, the LANES x 32-bit payload replaces node slot `slot` of the
// flit: 32-bit slots (slot mod (4/LANES))*LANES ... +LANES-1 of the 128-bit flit.
// Everything else passes unchanged. Combinational; used in the router's
// switch-traversal stage on the flit leaving the loading input port. The paper
// names this unit only; the slot layout is this design's choice.
module payload_generator
  import ina_pkg::*;
#(
  parameter int unsigned LANES = 1
) (
  input  flit_t                      flit_in,
  input  logic                       load,
  input  logic [3:0]                 slot,
  input  logic [LANES*PAYLOAD_W-1:0] payload,
  output flit_t                      flit_out
);
  localparam int unsigned NODES_PER_FLIT = SLOTS / LANES;
  int unsigned base;

  always_comb begin
    flit_out = flit_in;
    base     = (int'(slot) % NODES_PER_FLIT) * LANES;
    if (load)
      for (int i = 0; i < LANES; i++)
        flit_out.data[(base + i)*PAYLOAD_W +: PAYLOAD_W] = payload[i*PAYLOAD_W +: PAYLOAD_W];
  end
endmodule
