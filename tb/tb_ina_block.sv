// tb_ina_block: random operands. Operand 2 is the flit of the selected neighbour
// port; the sum (per 32-bit lane, modulo 2^32) must appear only on the selected
// output port with header/sideband bits of operand 2 unchanged. Checked for one
// lane and for the four-lane SIMD variant.
module tb_ina_block;
  import ina_pkg::*;
  logic en;
  logic [PAYLOAD_W-1:0]   op1a;
  logic [4*PAYLOAD_W-1:0] op1b;
  flit_t in_flit[NUM_PORTS];
  port_e op2_sel, out_sel;
  logic ova[NUM_PORTS], ovb[NUM_PORTS];
  flit_t ofa[NUM_PORTS], ofb[NUM_PORTS];
  logic [PAYLOAD_W-1:0] psa;
  logic [4*PAYLOAD_W-1:0] psb;
  int checks = 0, failures = 0;

  ina_block #(.LANES(1)) dut1 (.en, .op1(op1a), .in_flit, .op2_sel, .out_sel,
                               .out_valid(ova), .out_flit(ofa), .psum(psa));
  ina_block #(.LANES(4)) dut4 (.en, .op1(op1b), .in_flit, .op2_sel, .out_sel,
                               .out_valid(ovb), .out_flit(ofb), .psum(psb));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 8) $display("%s", what); end
  endtask

  initial begin
    for (int t = 0; t < 500; t++) begin
      flit_t ea, eb, src;
      for (int p = 0; p < NUM_PORTS; p++) in_flit[p] = {$urandom, $urandom, $urandom, $urandom, 3'($urandom)};
      op1a = (t % 7 == 0) ? 32'hFFFF_FFFF : $urandom;
      op1b = {$urandom, $urandom, $urandom, $urandom};
      op2_sel = port_e'($urandom_range(1, 4));
      out_sel = port_e'($urandom_range(1, 4));
      en = ($urandom_range(0, 3) != 0);
      #1;
      src = in_flit[int'(op2_sel)];
      ea = src; eb = src;
      ea.data[31:0] = src.data[31:0] + op1a;
      for (int l = 0; l < 4; l++) eb.data[l*32 +: 32] = src.data[l*32 +: 32] + op1b[l*32 +: 32];
      chk(psa == ea.data[31:0], "psum lanes=1");
      chk(psb == eb.data, "psum lanes=4");
      for (int o = 0; o < NUM_PORTS; o++) begin
        logic sel;
        sel = en && (o == int'(out_sel));
        chk(ova[o] == sel && ovb[o] == sel, "demux valid");
        if (sel) begin
          chk(ofa[o] == ea, "sum flit lanes=1");
          chk(ofb[o] == eb, "sum flit lanes=4");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
