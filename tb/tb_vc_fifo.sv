// tb_vc_fifo: random push/pop traffic against a queue model; checks the
// fall-through output, empty/full and the occupancy count every cycle.
module tb_vc_fifo;
  localparam int DEPTH = 4;
  localparam int W = 131;
  logic clk = 0, rst_n = 0;
  logic push, pop, empty, full;
  logic [W-1:0] wr_data, rd_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  logic [W-1:0] q[$];
  int checks = 0, failures = 0;

  vc_fifo #(.DEPTH(DEPTH), .W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("%0t: %s", $time, what);
    end
  endtask

  initial begin
    push = 0; pop = 0; wr_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      chk(empty == (q.size() == 0), "empty");
      chk(full == (q.size() == DEPTH), "full");
      chk(int'(count) == q.size(), "count");
      if (q.size() > 0) chk(rd_data == q[0], "data");
      push = ($urandom_range(0, 2) != 0) && (q.size() < DEPTH || ($urandom_range(0, 1) == 1 && q.size() > 0));
      pop  = (q.size() > 0) && ($urandom_range(0, 2) != 0);
      if (push && q.size() == DEPTH && !pop) push = 0;
      wr_data = {$urandom, $urandom, $urandom, $urandom, 3'($urandom)};
      @(posedge clk);
      #1;
      if (pop) void'(q.pop_front());
      if (push) q.push_back(wr_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
