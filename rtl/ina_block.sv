// ina_block: the in-network accumulation datapath added to the router.
//
// As drawn in the paper's INA-block figure: Op1 comes from the local network
// interface (the psum of the local PE), Op2 is taken by a 4:1 multiplexer from the
// flit of one of the E/W/N/S input ports, an adder forms psum = Op1 + Op2, and a
// 1:4 demultiplexer places the resulting flit on one of the E/W/N/S output ports.
// The flit keeps its sideband and header bits; only its LANES 32-bit psum slots
// (slot i = data[32*i +: 32]) are replaced by the sums. LANES > 1 turns the adder
// into the SIMD adder the paper suggests for several PEs per router.
// The adder is a plain two's-complement adder per 32-bit lane, wrapping on
// overflow; the paper only says a fast digital adder is used. Combinational; the
// router uses it in its switch-traversal stage and registers the result.
module ina_block
  import ina_pkg::*;
#(
  parameter int unsigned LANES = 1
) (
  input  logic                       en,
  input  logic [LANES*PAYLOAD_W-1:0] op1,
  input  flit_t                      in_flit [NUM_PORTS], // index by port_e; L unused
  input  port_e                      op2_sel,             // N, S, E or W
  input  port_e                      out_sel,             // N, S, E or W
  output logic                       out_valid[NUM_PORTS],
  output flit_t                      out_flit [NUM_PORTS],
  output logic [LANES*PAYLOAD_W-1:0] psum
);
  flit_t op2_flit;
  flit_t sum_flit;

  // 4:1 operand-2 multiplexer over the neighbour ports
  always_comb begin
    op2_flit = '0;
    unique case (op2_sel)
      PORT_N:  op2_flit = in_flit[PORT_N];
      PORT_S:  op2_flit = in_flit[PORT_S];
      PORT_E:  op2_flit = in_flit[PORT_E];
      PORT_W:  op2_flit = in_flit[PORT_W];
      default: op2_flit = '0;
    endcase
  end

  // lane-wise adder
  always_comb begin
    sum_flit = op2_flit;
    for (int i = 0; i < LANES; i++) begin
      psum[i*PAYLOAD_W +: PAYLOAD_W] = op1[i*PAYLOAD_W +: PAYLOAD_W] +
                                       op2_flit.data[i*PAYLOAD_W +: PAYLOAD_W];
      sum_flit.data[i*PAYLOAD_W +: PAYLOAD_W] = psum[i*PAYLOAD_W +: PAYLOAD_W];
    end
  end

  // 1:4 result demultiplexer
  always_comb begin
    for (int o = 0; o < NUM_PORTS; o++) begin
      out_valid[o] = en && (o != int'(PORT_L)) && (int'(out_sel) == o);
      out_flit[o]  = out_valid[o] ? sum_flit : '0;
    end
  end
endmodule
