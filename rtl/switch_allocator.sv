// switch_allocator: separable input-first switch allocation.
//
// Stage 1: in every input port a round-robin arbiter picks one VC among those that
// are active, have a flit, hold a credit for their downstream VC and are not held
// back by the INA or gather logic (req already includes all of that). Stage 2: in
// every output port a round-robin arbiter picks one input port among the stage-1
// winners heading there. Result: at most one flit per input and per output each
// cycle. Arbiters advance only on a final grant. The organisation is this design's
// choice; the paper only names the unit.
module switch_allocator
  import ina_pkg::*;
#(
  parameter int unsigned P = NUM_PORTS,
  parameter int unsigned V = NUM_VC
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  req      [P][V],
  input  port_e req_port [P][V],
  output logic  grant    [P][V],   // input VC wins the crossbar this cycle
  output logic  out_valid[P],      // output port receives a flit
  output logic [2:0] out_sel[P]    // input port that feeds it
);
  logic [P-1:0] out_gnt[P];
  logic [P-1:0] in_done;
  logic [P-1:0] win_v;
  port_e        iport_v[P];

  // stage 1: one VC per input port
  for (genvar p = 0; p < P; p++) begin : g_in
    logic [V-1:0] vreq, vgnt;
    logic         win;
    port_e        iport;
    always_comb for (int v = 0; v < V; v++) vreq[v] = req[p][v];
    rr_arbiter #(.N(V)) u_in (
      .clk, .rst_n, .req(vreq), .advance(in_done[p]), .grant(vgnt)
    );
    always_comb begin
      win   = (vgnt != '0);
      iport = PORT_L;
      for (int v = 0; v < V; v++) if (vgnt[v]) iport = req_port[p][v];
    end
    always_comb for (int v = 0; v < V; v++) grant[p][v] = in_done[p] && vgnt[v];
    assign win_v[p]   = win;
    assign iport_v[p] = iport;
  end

  // stage 2: one input port per output port
  for (genvar o = 0; o < P; o++) begin : g_out
    logic [P-1:0] oreq;
    for (genvar p = 0; p < P; p++) begin : g_r
      assign oreq[p] = win_v[p] && (int'(iport_v[p]) == o);
    end
    rr_arbiter #(.N(P)) u_out (
      .clk, .rst_n, .req(oreq), .advance(1'b1), .grant(out_gnt[o])
    );
    always_comb begin
      out_valid[o] = (out_gnt[o] != '0);
      out_sel[o]   = '0;
      for (int p = 0; p < P; p++) if (out_gnt[o][p]) out_sel[o] = 3'(p);
    end
  end

  always_comb begin
    for (int p = 0; p < P; p++) begin
      in_done[p] = 1'b0;
      for (int o = 0; o < P; o++) if (out_gnt[o][p]) in_done[p] = 1'b1;
    end
  end
endmodule
