// tb_switch_allocator: random requests. Checks that every grant answers a
// request, that each input and each output gets at most one grant, that out_sel
// names the granted input, that some request is served whenever there is one, and
// that under constant full load every input VC is served (round-robin fairness).
module tb_switch_allocator;
  import ina_pkg::*;
  localparam int P = NUM_PORTS, V = NUM_VC;
  logic clk = 0, rst_n = 0;
  logic req[P][V], grant[P][V], out_valid[P];
  logic [2:0] out_sel[P];
  port_e rport[P][V];
  int checks = 0, failures = 0;
  int served[P][V];

  switch_allocator dut (.clk, .rst_n, .req, .req_port(rport), .grant, .out_valid, .out_sel);
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
    for (int p = 0; p < P; p++) for (int v = 0; v < V; v++) begin req[p][v] = 0; rport[p][v] = PORT_L; served[p][v] = 0; end
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      int any, ng; int in_cnt[P]; int out_cnt[P];
      @(negedge clk);
      for (int p = 0; p < P; p++) for (int v = 0; v < V; v++) begin
        if (t < 2000) begin
          req[p][v] = 1'($urandom); rport[p][v] = port_e'($urandom_range(0, P - 1));
        end else begin
          req[p][v] = 1; rport[p][v] = port_e'((p + v) % P);  // full load phase
        end
      end
      #1;
      any = 0; ng = 0;
      for (int p = 0; p < P; p++) begin in_cnt[p] = 0; out_cnt[p] = 0; end
      for (int p = 0; p < P; p++) for (int v = 0; v < V; v++) begin
        if (req[p][v]) any = 1;
        if (grant[p][v]) begin
          int o; o = int'(rport[p][v]);
          chk(req[p][v], "grant without request");
          chk(out_valid[o] && int'(out_sel[o]) == p, "out_sel mismatch");
          in_cnt[p]++; out_cnt[o]++; ng++;
          if (t >= 2000) served[p][v]++;
        end
      end
      for (int p = 0; p < P; p++) begin
        chk(in_cnt[p] <= 1, "two grants at one input");
        chk(out_cnt[p] == (out_valid[p] ? 1 : 0), "output grant count");
      end
      chk(!any || ng > 0, "requests but no grant");
    end
    for (int p = 0; p < P; p++) for (int v = 0; v < V; v++) chk(served[p][v] > 100, "starved VC");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
