// tb_vc_allocator: random head requests and tail releases. A model of the
// output-VC busy table checks every cycle that grants go only to requesters, that
// each granted VC was free and is given to one requester only, that the VC given
// is the lowest free one of the requested port, and that requests do get served.
module tb_vc_allocator;
  import ina_pkg::*;
  localparam int P = NUM_PORTS, V = NUM_VC;
  logic clk = 0, rst_n = 0;
  logic req[P][V], grant[P][V], grant_vc[P][V], rel_v[P], rel_vc[P], busy[P][V];
  port_e rport[P][V];
  logic mbusy[P][V];
  int checks = 0, failures = 0, ngrants = 0;

  vc_allocator dut (.clk, .rst_n, .req, .req_port(rport), .grant, .grant_vc,
                    .release_valid(rel_v), .release_vc(rel_vc), .busy);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 8) $display("%0t: %s", $time, what); end
  endtask

  initial begin
    for (int p = 0; p < P; p++) for (int v = 0; v < V; v++) begin req[p][v] = 0; rport[p][v] = PORT_L; mbusy[p][v] = 0; end
    for (int o = 0; o < P; o++) begin rel_v[o] = 0; rel_vc[o] = 0; end
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      logic used[P][V];
      @(negedge clk);
      for (int p = 0; p < P; p++) for (int v = 0; v < V; v++) begin
        req[p][v] = ($urandom_range(0, 2) == 0); rport[p][v] = port_e'($urandom_range(0, P - 1));
      end
      for (int o = 0; o < P; o++) begin
        rel_v[o] = 0;
        for (int k = 0; k < V; k++) if (mbusy[o][k] && $urandom_range(0, 3) == 0) begin rel_v[o] = 1; rel_vc[o] = 1'(k); end
      end
      #1;
      for (int o = 0; o < P; o++) for (int k = 0; k < V; k++) begin
        chk(busy[o][k] == mbusy[o][k], "busy table"); used[o][k] = 0;
      end
      for (int p = 0; p < P; p++) for (int v = 0; v < V; v++) if (grant[p][v]) begin
        int o, k, low;
        o = int'(rport[p][v]); k = int'(grant_vc[p][v]);
        low = -1;
        for (int j = V - 1; j >= 0; j--) if (!mbusy[o][j]) low = j;
        chk(req[p][v], "grant without request");
        chk(!mbusy[o][k], "granted a busy VC");
        chk(!used[o][k], "VC granted twice");
        chk(k == low, "not the lowest free VC");
        used[o][k] = 1; ngrants++;
      end
      @(posedge clk);
      for (int o = 0; o < P; o++) begin
        for (int k = 0; k < V; k++) if (used[o][k]) mbusy[o][k] = 1;
        if (rel_v[o]) mbusy[o][int'(rel_vc[o])] = 0;
      end
    end
    chk(ngrants > 500, "too few grants");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
