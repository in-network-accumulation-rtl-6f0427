// tb_pe: loads x random weights, streams several activation vectors with random
// gaps and checks each psum against a dot product computed in the testbench
// (modulo 2^32), the result tags, that activations are refused before all weights
// are in, and the rate: with activations always offered a vector of x takes x
// cycles plus one to hand over the result.
module tb_pe;
  logic clk = 0, rst_n = 0;
  logic clear, w_valid, w_ready, a_valid, a_ready, res_valid, res_ready;
  logic [13:0] nweights;
  logic [31:0] w_data, a_data, res_data;
  logic [15:0] res_tag;
  int checks = 0, failures = 0;
  logic [31:0] wts[$];

  pe #(.MEM_BYTES(1024)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 8) $display("%0t: %s", $time, what); end
  endtask

  initial begin
    clear = 0; w_valid = 0; a_valid = 0; res_ready = 0; w_data = 0; a_data = 0; nweights = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int layer = 0; layer < 3; layer++) begin
      int x;
      x = (layer == 0) ? 256 : $urandom_range(1, 60);
      nweights = 14'(x);
      clear = 1; @(posedge clk); #1 clear = 0;
      wts.delete();
      // activations refused while weights load
      a_valid = 1; #0; chk(!a_ready, "activation accepted before weights");
      a_valid = 0;
      for (int i = 0; i < x; i++) begin
        @(negedge clk);
        w_valid = 1; w_data = $urandom; wts.push_back(w_data);
        @(posedge clk); #1;
        w_valid = 0;
      end
      for (int vec = 0; vec < 4; vec++) begin
        logic [31:0] exp; int start, cyc; logic gaps;
        exp = 0; gaps = (vec % 2 == 1);
        @(negedge clk); start = $time / 10;
        for (int i = 0; i < x; i++) begin
          logic [31:0] a;
          a = $urandom;
          if (gaps) begin a_valid = 0; repeat ($urandom_range(0, 2)) @(negedge clk); end
          a_valid = 1; a_data = a;
          #1; chk(a_ready, "activation refused");
          exp += wts[i] * a;
          @(negedge clk);
        end
        a_valid = 0;
        chk(res_valid, "result not ready after x activations");
        cyc = $time / 10 - start;
        if (!gaps) chk(cyc == x, "x MACs must take x cycles");
        chk(res_data == exp, "psum value");
        chk(int'(res_tag) == vec, "tag");
        res_ready = 1; @(negedge clk); res_ready = 0;
        chk(!res_valid, "result not released");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
