// tb_load_signal_generator: builds random candidate flits at the input VCs and
// checks hold/load against an independently written rule: a flit is a hit if the
// node is a member, it comes from a neighbour, belongs to a gather packet of the
// node's group and sits at body position 1 + slot/4. Only the first hit may pass,
// and only with a payload ready; load follows its switch grant.
module tb_load_signal_generator;
  import ina_pkg::*;
  localparam int P = NUM_PORTS, V = NUM_VC;
  logic member, pl_valid, load;
  logic [TAG_W-1:0] grp;
  logic [3:0] slot;
  logic act[P][V], ne[P][V], gnt[P][V], hold[P][V];
  pkt_e pt[P][V];
  logic [TAG_W-1:0] tg[P][V];
  logic [3:0] pos[P][V];
  port_e load_port;
  int checks = 0, failures = 0, loads = 0;

  load_signal_generator dut (.member, .grp, .slot, .pl_valid, .cand_active(act), .cand_nonempty(ne),
    .cand_ptype(pt), .cand_tag(tg), .cand_pos(pos), .sa_grant(gnt), .hold, .load, .load_port);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int first_p, first_v; logic found; logic exp_load; int exp_port;
      member = ($urandom_range(0, 4) != 0); pl_valid = 1'($urandom);
      grp = 16'($urandom_range(0, 1)); slot = 4'($urandom_range(0, 11));
      for (int p = 0; p < P; p++) for (int v = 0; v < V; v++) begin
        act[p][v] = ($urandom_range(0, 3) != 0); ne[p][v] = ($urandom_range(0, 3) != 0);
        pt[p][v] = pkt_e'($urandom_range(0, 2)); tg[p][v] = 16'($urandom_range(0, 1));
        pos[p][v] = 4'($urandom_range(0, 4)); gnt[p][v] = 1'($urandom);
      end
      #1;
      found = 0; exp_load = 0; exp_port = 0;
      for (int p = 0; p < P; p++) for (int v = 0; v < V; v++) begin
        logic hit, eh;
        hit = member && p != 0 && act[p][v] && ne[p][v] && pt[p][v] == PKT_GATHER &&
              tg[p][v] == grp && int'(pos[p][v]) == 1 + int'(slot) / 4;
        eh = hit && (found || !pl_valid);
        if (hit && !found && pl_valid && gnt[p][v]) begin exp_load = 1; exp_port = p; end
        if (hit) found = 1;
        checks++;
        if (hold[p][v] != eh) begin failures++; if (failures < 5) $display("t=%0d hold[%0d][%0d]", t, p, v); end
      end
      checks++;
      if (load != exp_load || (exp_load && int'(load_port) != exp_port)) begin
        failures++; if (failures < 5) $display("t=%0d load", t);
      end
      if (load) loads++;
    end
    checks++;
    if (loads == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
