// tb_ina_control: walks the INA control FSM through every transition of the
// paper's state diagram and checks state, operand capture and the NI handshake.
// States: 0 = Acquire Operand 1, 1 = Acquire Operand 2, 2 = Summation.
module tb_ina_control;
  import ina_pkg::*;
  logic clk = 0, rst_n = 0;
  logic ni_valid, ni_is_ina, ni_ack, op2_ready, flush, result_sent;
  logic [31:0] ni_data, op1_data;
  logic [TAG_W-1:0] ni_tag, op1_tag;
  logic [1:0] state;
  int checks = 0, failures = 0;

  ina_control dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("%0t: %s (state=%0d)", $time, what, state); end
  endtask

  task automatic step;
    @(posedge clk); #1;
  endtask

  initial begin
    ni_valid = 0; ni_is_ina = 0; op2_ready = 0; flush = 0; result_sent = 0;
    ni_data = '0; ni_tag = '0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    chk(state == 0, "reset state");
    for (int r = 0; r < 20; r++) begin
      logic [31:0] d; logic [15:0] tg;
      d = $urandom; tg = 16'($urandom);
      // NI invalid -> stay in ACQ_OP1
      ni_valid = 0; ni_is_ina = 1; step; chk(state == 0, "stay OP1 (NI invalid)");
      // packet != INA -> stay
      ni_valid = 1; ni_is_ina = 0; #0; chk(ni_ack == 0, "no ack for non-INA"); step;
      chk(state == 0, "stay OP1 (not INA)");
      // Operand1_Ready
      ni_is_ina = 1; ni_data = d; ni_tag = tg; #1; chk(ni_ack == 1, "ack on operand 1");
      step; ni_valid = 0;
      chk(state == 1, "to OP2"); chk(op1_data == d && op1_tag == tg, "operand 1 captured");
      // input flits that are not operand 2
      repeat ($urandom_range(0, 3)) begin step; chk(state == 1, "stay OP2"); end
      if (r % 4 == 3) begin
        flush = 1; step; flush = 0; chk(state == 0, "Operand2_Invalid -> OP1");
        continue;
      end
      op2_ready = 1; step; op2_ready = 0; chk(state == 2, "Operand2_Ready -> SUM");
      repeat ($urandom_range(0, 2)) begin step; chk(state == 2, "stay SUM (!Result_Sent)"); end
      chk(op1_data == d, "operand 1 held during summation");
      result_sent = 1; step; result_sent = 0; chk(state == 0, "Result_Sent -> OP1");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
