// tb_crossbar: random flits and selections; every enabled output must carry the
// selected input's flit and every disabled output must be idle and zero.
module tb_crossbar;
  import ina_pkg::*;
  flit_t in_flit[NUM_PORTS];
  logic en[NUM_PORTS];
  logic [2:0] sel[NUM_PORTS];
  logic out_valid[NUM_PORTS];
  flit_t out_flit[NUM_PORTS];
  int checks = 0, failures = 0;

  crossbar dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      for (int p = 0; p < NUM_PORTS; p++) begin
        in_flit[p] = {$urandom, $urandom, $urandom, $urandom, 3'($urandom)};
        en[p] = 1'($urandom);
        sel[p] = 3'($urandom_range(0, NUM_PORTS - 1));
      end
      #1;
      for (int o = 0; o < NUM_PORTS; o++) begin
        checks++;
        if (out_valid[o] != en[o]) failures++;
        checks++;
        if (en[o] ? (out_flit[o] != in_flit[sel[o]]) : (out_flit[o] != '0)) begin
          failures++;
          if (failures < 5) $display("t=%0d out %0d wrong", t, o);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
