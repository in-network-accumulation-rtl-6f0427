// vc_allocator: assigns downstream virtual channels to packets.
//
// A head flit at input VC (p,v) that wants output port o picks the lowest-numbered
// VC of o that is free. For every output VC a round-robin arbiter chooses one of the
// input VCs that picked it; losers retry next cycle. A granted output VC stays busy
// until the tail of its packet wins the switch (release). Grants are combinational
// in the RC/VA cycle; the busy state changes at the clock edge. The separable
// organisation and round-robin policy are this design's choice; the paper only
// names the unit.
module vc_allocator
  import ina_pkg::*;
#(
  parameter int unsigned P = NUM_PORTS,
  parameter int unsigned V = NUM_VC
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  req      [P][V],
  input  port_e req_port [P][V],
  output logic  grant    [P][V],
  output logic  grant_vc [P][V],
  input  logic  release_valid [P],   // per output port: a tail left on release_vc
  input  logic  release_vc    [P],
  output logic  busy     [P][V]
);
  localparam int unsigned R = P * V;

  logic       pick_ok [P][V];
  logic       pick_vc [P][V];
  logic [R-1:0] arb_req [P][V];
  logic [R-1:0] arb_gnt [P][V];

  // Each requester picks the lowest free VC of its output port.
  always_comb begin
    for (int p = 0; p < P; p++)
      for (int v = 0; v < V; v++) begin
        pick_ok[p][v] = 1'b0;
        pick_vc[p][v] = 1'b0;
        for (int k = V - 1; k >= 0; k--)
          if (!busy[int'(req_port[p][v])][k]) begin
            pick_ok[p][v] = 1'b1;
            pick_vc[p][v] = 1'(k);
          end
      end
  end

  for (genvar o = 0; o < P; o++) begin : g_o
    for (genvar k = 0; k < V; k++) begin : g_k
      always_comb begin
        for (int p = 0; p < P; p++)
          for (int v = 0; v < V; v++)
            arb_req[o][k][p*V+v] = req[p][v] && pick_ok[p][v] &&
                                   (int'(req_port[p][v]) == o) && (pick_vc[p][v] == 1'(k));
      end
      rr_arbiter #(.N(R)) u_arb (
        .clk, .rst_n, .req(arb_req[o][k]), .advance(1'b1), .grant(arb_gnt[o][k])
      );
    end
  end

  always_comb begin
    for (int p = 0; p < P; p++)
      for (int v = 0; v < V; v++) begin
        grant[p][v]    = 1'b0;
        grant_vc[p][v] = pick_vc[p][v];
        for (int o = 0; o < P; o++)
          for (int k = 0; k < V; k++)
            if (arb_gnt[o][k][p*V+v]) grant[p][v] = 1'b1;
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < P; o++)
        for (int k = 0; k < V; k++) busy[o][k] <= 1'b0;
    end else begin
      for (int o = 0; o < P; o++) begin
        for (int k = 0; k < V; k++)
          if (arb_gnt[o][k] != '0) busy[o][k] <= 1'b1;
        if (release_valid[o]) busy[o][int'(release_vc[o])] <= 1'b0;
      end
    end
  end
endmodule
