// tb_network_interface: exercises every result path and the ejection side of the
// NI at node (1,2):
//   INA initiator  - a PE result becomes a two-flit INA packet (header fields, psum);
//   INA member     - a PE result is offered as operand 1 and released by the ack;
//   gather member  - a PE result becomes the gather payload, released by pl_ack;
//   gather init    - the payload starts a gather packet with it in the node's slot;
//   ejection       - gather flits go out on host_* in order; an INA sum ending here
//                    becomes the gather payload (member) or goes to host_*;
// and that injection never exceeds the router's buffer credits and ejection
// returns one credit per flit.
module tb_network_interface;
  import ina_pkg::*;
  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic pe_res_valid, pe_res_ready, inj_valid, inj_credit_valid, inj_credit_vc;
  logic [31:0] pe_res_data, op_data, pl_data;
  logic [TAG_W-1:0] pe_res_tag, op_tag;
  flit_t inj_flit, ej_flit, host_flit;
  logic ej_valid, ej_credit_valid, ej_credit_vc, op_valid, op_ack, pl_valid, pl_ack, host_valid;
  logic ina_injected, gather_injected;
  int checks = 0, failures = 0;

  network_interface dut (.clk, .rst_n, .cur_x(4'd1), .cur_y(4'd2), .cfg, .pe_res_valid, .pe_res_data,
    .pe_res_tag, .pe_res_ready, .inj_valid, .inj_flit, .inj_credit_valid, .inj_credit_vc,
    .ej_valid, .ej_flit, .ej_credit_valid, .ej_credit_vc, .op_valid, .op_data, .op_tag, .op_ack,
    .pl_valid, .pl_data, .pl_ack, .host_valid, .host_flit, .ina_injected, .gather_injected);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("%0t: %s", $time, what); end
  endtask

  // router side of injection: collect flits, return credits a few cycles later
  flit_t injq[$];
  int held[2];
  int ret[$];
  always @(posedge clk) begin
    inj_credit_valid <= 1'b0;
    if (rst_n) begin
      if (inj_valid) begin
        injq.push_back(inj_flit); held[int'(inj_flit.vc)]++;
        chk(held[int'(inj_flit.vc)] <= BUF_DEPTH, "injection beyond credits");
        ret.push_back(int'(inj_flit.vc));
      end
      if (ret.size() > 0 && $urandom_range(0, 2) == 0) begin
        int v; v = ret.pop_front();
        inj_credit_valid <= 1'b1; inj_credit_vc <= 1'(v); held[v]--;
      end
    end
  end

  flit_t hostq[$];
  int ej_credits = 0;
  always @(posedge clk) if (rst_n) begin
    if (host_valid) hostq.push_back(host_flit);
    if (ej_credit_valid) ej_credits++;
  end

  task automatic pe_result(logic [31:0] d, logic [15:0] t);
    @(negedge clk); pe_res_valid = 1; pe_res_data = d; pe_res_tag = t;
    do @(posedge clk); while (!pe_res_ready);
    @(negedge clk); pe_res_valid = 0;
  endtask

  task automatic eject(flit_t f);
    @(negedge clk); ej_valid = 1; ej_flit = f;
    @(negedge clk); ej_valid = 0;
  endtask

  function automatic flit_t mk(ftype_e t, logic vc, logic [127:0] d);
    flit_t f; f.ftype = t; f.vc = vc; f.data = d; return f;
  endfunction

  initial begin
    cfg = '0; pe_res_valid = 0; pe_res_data = 0; pe_res_tag = 0; op_ack = 0; pl_ack = 0;
    ej_valid = 0; ej_flit = '0; held[0] = 0; held[1] = 0; inj_credit_valid = 0; inj_credit_vc = 0;
    repeat (3) @(posedge clk); #1 rst_n = 1;

    // ---- INA initiator ----
    cfg.role = ROLE_INA_INIT; cfg.ina_dst_x = 4'd1; cfg.ina_dst_y = 4'd5;
    for (int r = 0; r < 6; r++) pe_result(32'hA000 + r, 16'(r));
    repeat (40) @(posedge clk);
    chk(injq.size() == 12, "INA packets injected");
    for (int r = 0; r < 6 && injq.size() >= 2; r++) begin
      flit_t h, t; head_t hd;
      h = injq.pop_front(); t = injq.pop_front(); hd = head_t'(h.data);
      chk(h.ftype == FT_HEAD && t.ftype == FT_TAIL && h.vc == t.vc, "INA packet framing");
      chk(hd.ptype == PKT_INA && hd.dst_x == 1 && hd.dst_y == 5 && hd.src_x == 1 && hd.src_y == 2 &&
          int'(hd.tag) == r, "INA header");
      chk(t.data[31:0] == 32'hA000 + r, "INA psum");
    end

    // ---- INA member ----
    cfg.role = ROLE_INA_MEMBER;
    @(negedge clk); pe_res_valid = 1; pe_res_data = 32'h55; pe_res_tag = 16'd9;
    #1 chk(op_valid && op_data == 32'h55 && op_tag == 9 && !pe_res_ready, "operand 1 offered");
    op_ack = 1; #1 chk(pe_res_ready, "ack releases PE result");
    @(negedge clk); op_ack = 0; pe_res_valid = 0;
    chk(injq.size() == 0, "member injects nothing");

    // ---- gather member ----
    cfg.role = ROLE_NONE; cfg.gather_member = 1;
    pe_result(32'h77, 16'd0);
    @(negedge clk); chk(pl_valid && pl_data == 32'h77, "gather payload from PE");
    pl_ack = 1; @(negedge clk); pl_ack = 0;
    chk(!pl_valid, "payload released");

    // ---- gather initiator ----
    cfg.gather_member = 0; cfg.gather_init = 1; cfg.gather_grp = 16'd4; cfg.gather_slot = 4'd5;
    cfg.gather_body = 4'd2; cfg.gather_dst_x = 4'd7; cfg.gather_dst_y = 4'd2;
    pe_result(32'hBEEF, 16'd0);
    repeat (30) @(posedge clk);
    chk(injq.size() == 3, "gather packet of 3 flits");
    if (injq.size() == 3) begin
      head_t hd; hd = head_t'(injq[0].data);
      chk(injq[0].ftype == FT_HEAD && injq[1].ftype == FT_BODY && injq[2].ftype == FT_TAIL, "gather framing");
      chk(hd.ptype == PKT_GATHER && hd.dst_x == 7 && hd.dst_y == 2 && hd.tag == 4, "gather header");
      chk(injq[1].data == '0, "first body flit empty");
      chk(injq[2].data == {64'h0, 32'hBEEF, 32'h0}, "payload in slot 5");
      injq.delete();
    end

    // ---- ejection of a gather packet to the host side ----
    cfg.gather_init = 0;
    begin
      head_t hd; hd = '0; hd.ptype = PKT_GATHER;
      eject(mk(FT_HEAD, 1, hd)); eject(mk(FT_BODY, 1, 128'h11)); eject(mk(FT_TAIL, 1, 128'h22));
      repeat (6) @(posedge clk);
      chk(hostq.size() == 3, "gather flits to host");
      if (hostq.size() == 3) chk(hostq[1].data == 128'h11 && hostq[2].data == 128'h22, "host order");
      hostq.delete();
    end

    // ---- ejection of an INA sum at a gather member ----
    cfg.gather_member = 1;
    begin
      head_t hd; hd = '0; hd.ptype = PKT_INA;
      eject(mk(FT_HEAD, 0, hd)); eject(mk(FT_TAIL, 0, 128'h1234));
      repeat (4) @(posedge clk);
      chk(pl_valid && pl_data == 32'h1234, "INA sum becomes gather payload");
      chk(hostq.size() == 0, "INA sum not sent to host");
      pl_ack = 1; @(negedge clk); pl_ack = 0;
    end

    // ---- ejection of an INA sum at a node outside any gather ----
    cfg.gather_member = 0;
    begin
      head_t hd; hd = '0; hd.ptype = PKT_INA;
      eject(mk(FT_HEAD, 1, hd)); eject(mk(FT_TAIL, 1, 128'h4321));
      repeat (4) @(posedge clk);
      chk(hostq.size() == 2 && hostq[1].data == 128'h4321, "INA sum to host");
    end
    chk(ej_credits == 7, "one credit per ejected flit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
