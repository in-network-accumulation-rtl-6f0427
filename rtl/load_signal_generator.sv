// load_signal_generator: decides when the local payload is loaded into a passing
// gather packet.
//
// A gather packet (head tag = gather group) collects one payload of LANES x 32 bits
// from each member node; node slot s lives in body flit 1 + s/(4/LANES). For every
// input VC this block checks whether the flit at its front is that body flit of a
// packet of this node's group arriving from a neighbour. Such a flit is held back
// from switch allocation until the NI has a payload (hold); once it wins the
// switch, `load` is raised for one cycle together with the input port, telling the
// payload generator to write the payload into the flit and the NI that the payload
// has been taken. At most one flit is loaded per cycle. The paper names this unit
// (taken from the gather router it builds on); the slot scheme and the hold are
// this design's choices.
module load_signal_generator
  import ina_pkg::*;
#(
  parameter int unsigned LANES = 1,
  parameter int unsigned P     = NUM_PORTS,
  parameter int unsigned V     = NUM_VC
) (
  input  logic             member,        // node is a gather member
  input  logic [TAG_W-1:0] grp,
  input  logic [3:0]       slot,
  input  logic             pl_valid,      // NI holds a payload
  input  logic             cand_active [P][V],
  input  logic             cand_nonempty[P][V],
  input  pkt_e             cand_ptype  [P][V],
  input  logic [TAG_W-1:0] cand_tag    [P][V],
  input  logic [3:0]       cand_pos    [P][V],
  input  logic             sa_grant    [P][V],
  output logic             hold        [P][V],
  output logic             load,
  output port_e            load_port
);
  localparam int unsigned NODES_PER_FLIT = SLOTS / LANES;
  logic [3:0] target_pos;
  assign target_pos = 4'(1 + int'(slot) / NODES_PER_FLIT);
  logic       hit  [P][V];
  logic       first[P][V];

  always_comb begin
    logic found;
    found = 1'b0;
    for (int p = 0; p < P; p++)
      for (int v = 0; v < V; v++) begin
        hit[p][v] = member && (p != int'(PORT_L)) && cand_active[p][v] && cand_nonempty[p][v] &&
                    (cand_ptype[p][v] == PKT_GATHER) && (cand_tag[p][v] == grp) &&
                    (cand_pos[p][v] == target_pos);
        first[p][v] = hit[p][v] && !found;
        // only the first hit may proceed, and only with a payload ready
        hold[p][v] = hit[p][v] && (found || !pl_valid);
        if (hit[p][v]) found = 1'b1;
      end
  end

  always_comb begin
    load      = 1'b0;
    load_port = PORT_L;
    for (int p = 0; p < P; p++)
      for (int v = 0; v < V; v++)
        if (first[p][v] && pl_valid && sa_grant[p][v]) begin
          load      = 1'b1;
          load_port = port_e'(p);
        end
  end
endmodule
