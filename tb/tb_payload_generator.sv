// tb_payload_generator: random flits, slots and payloads for one and for two
// lanes; the expected flit is built slot by slot in the testbench.
module tb_payload_generator;
  import ina_pkg::*;
  flit_t fin, fout1, fout2;
  logic load;
  logic [3:0] slot;
  logic [PAYLOAD_W-1:0] pl1;
  logic [2*PAYLOAD_W-1:0] pl2;
  int checks = 0, failures = 0;

  payload_generator #(.LANES(1)) dut1 (.flit_in(fin), .load, .slot, .payload(pl1), .flit_out(fout1));
  payload_generator #(.LANES(2)) dut2 (.flit_in(fin), .load, .slot, .payload(pl2), .flit_out(fout2));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      flit_t e1, e2;
      fin  = {$urandom, $urandom, $urandom, $urandom, 3'($urandom)};
      load = 1'($urandom);
      slot = 4'($urandom);
      pl1  = $urandom;
      pl2  = {$urandom, $urandom};
      #1;
      e1 = fin; e2 = fin;
      if (load) begin
        // one lane: 4 node slots per flit
        case (slot % 4)
          0: e1.data[31:0]   = pl1;
          1: e1.data[63:32]  = pl1;
          2: e1.data[95:64]  = pl1;
          3: e1.data[127:96] = pl1;
        endcase
        // two lanes: 2 node slots per flit, 64 bits each
        if (slot % 2 == 0) e2.data[63:0] = pl2;
        else               e2.data[127:64] = pl2;
      end
      checks += 2;
      if (fout1 != e1) begin failures++; if (failures < 5) $display("lanes=1 t=%0d slot=%0d", t, slot); end
      if (fout2 != e2) begin failures++; if (failures < 5) $display("lanes=2 t=%0d slot=%0d", t, slot); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
