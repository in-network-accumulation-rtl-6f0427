// tb_ina_router: one router at (2,2) with the testbench acting as the four
// neighbours and the NI.
//  1. latency: an uncontended single-flit packet must leave 4 cycles after it
//     entered (the paper's 4-cycle router);
//  2. random unicast traffic on all five inputs and both VCs, with credit flow
//     control on both sides: every flit leaves on its XY port, in order, nothing
//     is lost or duplicated;
//  3. INA: as a member node, an INA packet from W to E is held until the NI offers
//     operand 1, then leaves with psum + op1; an INA packet of another tag passes
//     unchanged;
//  4. gather: the node's payload is written into its slot of a passing gather
//     packet, which waits while the payload is not ready.
module tb_ina_router;
  import ina_pkg::*;
  localparam int P = NUM_PORTS, V = NUM_VC;
  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic flush;
  logic in_valid[P], co_v[P], co_vc[P], out_valid[P], ci_v[P], ci_vc[P];
  flit_t in_flit[P], out_flit[P];
  logic op_v, op_ack, pl_v, pl_ack;
  logic [31:0] op_d, pl_d;
  logic [TAG_W-1:0] op_t;
  logic ina_sum, load_evt, ina_stall, ld_stall;
  logic [1:0] ina_state;
  int checks = 0, failures = 0;
  int cyc = 0;

  ina_router dut (.clk, .rst_n, .cur_x(4'd2), .cur_y(4'd2), .cfg, .flush,
    .in_valid, .in_flit, .credit_out_valid(co_v), .credit_out_vc(co_vc),
    .out_valid, .out_flit, .credit_in_valid(ci_v), .credit_in_vc(ci_vc),
    .ni_op_valid(op_v), .ni_op_data(op_d), .ni_op_tag(op_t), .ni_op_ack(op_ack),
    .ni_pl_valid(pl_v), .ni_pl_data(pl_d), .ni_pl_ack(pl_ack),
    .ina_sum, .load_evt, .ina_stall, .ld_stall, .ina_state);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("%0t: %s", $time, what); end
  endtask

  // ---- upstream credits held by the testbench for each router input VC ----
  int ucred[P][V];
  always @(posedge clk) if (rst_n) for (int p = 0; p < P; p++) if (co_v[p]) ucred[p][int'(co_vc[p])]++;

  // ---- downstream: accept every flit, return its credit after a random delay ----
  int dpend[P][V][$];
  always @(posedge clk) begin
    for (int p = 0; p < P; p++) begin
      ci_v[p] <= 1'b0;
      for (int v = 0; v < V; v++)
        if (dpend[p][v].size() > 0 && dpend[p][v][0] <= cyc) begin
          void'(dpend[p][v].pop_front());
          ci_v[p] <= 1'b1; ci_vc[p] <= 1'(v);
          break;
        end
    end
  end

  flit_t outq[P][$];
  int    outcyc[P][$];
  always @(posedge clk) if (rst_n)
    for (int p = 0; p < P; p++)
      if (out_valid[p]) begin
        outq[p].push_back(out_flit[p]); outcyc[p].push_back(cyc);
        dpend[p][int'(out_flit[p].vc)].push_back(cyc + $urandom_range(1, 6));
      end

  // ---- drivers ----
  flit_t inq[P][$];
  always @(negedge clk) begin
    for (int p = 0; p < P; p++) begin
      in_valid[p] = 1'b0;
      if (inq[p].size() > 0 && ucred[p][int'(inq[p][0].vc)] > 0) begin
        in_flit[p] = inq[p].pop_front();
        in_valid[p] = 1'b1;
        ucred[p][int'(in_flit[p].vc)]--;
      end
    end
  end

  function automatic flit_t mkhead(pkt_e t, int dx, int dy, int tg, logic vc, logic single, int id);
    head_t h; flit_t f;
    h = '0; h.ptype = t; h.dst_x = 4'(dx); h.dst_y = 4'(dy); h.tag = 16'(tg); h.rsvd[31:0] = id;
    f.ftype = single ? FT_HEADTAIL : FT_HEAD; f.vc = vc; f.data = h;
    return f;
  endfunction

  function automatic port_e xy(int dx, int dy);
    if (dx > 2) return PORT_E;
    if (dx < 2) return PORT_W;
    if (dy > 2) return PORT_S;
    if (dy < 2) return PORT_N;
    return PORT_L;
  endfunction

  // packets sent, per output port: id sequence expected per (port)
  typedef struct { int id; int len; port_e op; } pkt_t;

  initial begin
    cfg = '0; flush = 0; op_v = 0; op_d = 0; op_t = 0; pl_v = 0; pl_d = 0;
    for (int p = 0; p < P; p++) begin in_valid[p] = 0; in_flit[p] = '0; ci_v[p] = 0; ci_vc[p] = 0;
      for (int v = 0; v < V; v++) ucred[p][v] = BUF_DEPTH; end
    repeat (3) @(posedge clk); #1 rst_n = 1;

    // ---------- 1. latency ----------
    begin
      int t0;
      @(negedge clk);
      inq[PORT_W].push_back(mkhead(PKT_UNICAST, 5, 2, 0, 0, 1, 1));
      @(posedge clk); t0 = cyc;   // flit is on in_valid during this cycle
      repeat (10) @(posedge clk);
      chk(outq[PORT_E].size() == 1, "latency packet arrived");
      if (outq[PORT_E].size() == 1) begin
        chk(outcyc[PORT_E][0] - t0 == 4, $sformatf("router latency %0d, expected 4", outcyc[PORT_E][0] - t0));
        void'(outq[PORT_E].pop_front()); void'(outcyc[PORT_E].pop_front());
      end
    end

    // ---------- 2. random unicast ----------
    begin
      int id; int exp_ids[P][$]; int total;
      id = 100; total = 0;
      for (int n = 0; n < 400; n++) begin
        int ip, dx, dy, len; logic vc; port_e op;
        ip = $urandom_range(0, P - 1); vc = 1'($urandom);
        // choose a destination reachable from this input under XY (no U-turns)
        do begin
          dx = $urandom_range(0, 5); dy = $urandom_range(0, 5); op = xy(dx, dy);
        end while (int'(op) == ip && ip != 0 ||
                   (ip == int'(PORT_E) && op == PORT_E) || (ip == int'(PORT_W) && op == PORT_W) ||
                   ((ip == int'(PORT_N) || ip == int'(PORT_S)) && (op == PORT_E || op == PORT_W)));
        len = $urandom_range(1, 4);
        inq[ip].push_back(mkhead(PKT_UNICAST, dx, dy, 0, vc, len == 1, id));
        for (int k = 1; k < len; k++) begin
          flit_t f; f.ftype = (k == len - 1) ? FT_TAIL : FT_BODY; f.vc = vc; f.data = {96'(0), 32'(id)};
          inq[ip].push_back(f);
        end
        total += len;
        id++;
        if (n % 50 == 49) repeat (20) @(posedge clk);
      end
      repeat (600) @(posedge clk);
      // reassemble per output port and VC: every packet must be contiguous and complete
      begin
        int got; got = 0;
        for (int p = 0; p < P; p++) begin
          int cur[V]; for (int v = 0; v < V; v++) cur[v] = -1;
          while (outq[p].size() > 0) begin
            flit_t f; int v; f = outq[p].pop_front(); void'(outcyc[p].pop_front()); v = int'(f.vc); got++;
            if (is_head(f.ftype)) begin
              head_t h; h = head_t'(f.data);
              chk(cur[v] == -1, "head inside a packet");
              chk(xy(int'(h.dst_x), int'(h.dst_y)) == port_e'(p), "wrong output port");
              cur[v] = int'(h.rsvd[31:0]);
              if (f.ftype == FT_HEADTAIL) cur[v] = -1;
            end else begin
              chk(cur[v] == int'(f.data[31:0]), "body flit of another packet");
              if (f.ftype == FT_TAIL) cur[v] = -1;
            end
          end
        end
        chk(got == total, $sformatf("flits out %0d of %0d", got, total));
      end
    end

    // ---------- 3. in-network accumulation ----------
    begin
      flit_t tl, tl2; int sum_seen; logic [31:0] psum_in, op1;
      cfg.role = ROLE_INA_MEMBER;
      psum_in = $urandom; op1 = $urandom;
      // INA packet of another tag first, then ours
      inq[PORT_W].push_back(mkhead(PKT_INA, 5, 2, 9, 0, 0, 0));
      tl.ftype = FT_TAIL; tl.vc = 0; tl.data = {96'(0), 32'h1234_5678}; inq[PORT_W].push_back(tl);
      inq[PORT_W].push_back(mkhead(PKT_INA, 5, 2, 3, 1, 0, 0));
      tl2.ftype = FT_TAIL; tl2.vc = 1; tl2.data = {96'hABC, psum_in}; inq[PORT_W].push_back(tl2);
      repeat (20) @(posedge clk);
      // nothing but heads may leave while operand 1 is missing
      chk(outq[PORT_E].size() == 2, "INA payloads held without operand 1");
      chk(ina_state == 2'd0, "waiting in Acquire Operand 1");
      @(negedge clk); op_v = 1; op_d = op1; op_t = 16'd3;
      #1 chk(op_ack, "operand 1 taken");
      @(negedge clk); op_v = 0;
      repeat (20) @(posedge clk);
      chk(outq[PORT_E].size() == 4, "INA flits forwarded");
      sum_seen = 0;
      while (outq[PORT_E].size() > 0) begin
        flit_t f; f = outq[PORT_E].pop_front(); void'(outcyc[PORT_E].pop_front());
        if (f.ftype == FT_TAIL && f.data[127:32] == 96'hABC) begin
          chk(f.data[31:0] == psum_in + op1, "accumulated psum");
          sum_seen++;
        end
        if (f.ftype == FT_TAIL && f.data[127:32] == 96'h0)
          chk(f.data[31:0] == 32'h1234_5678, "other-tag INA packet unchanged");
      end
      chk(sum_seen == 1, "accumulated flit seen once");
      chk(ina_state == 2'd0, "back in Acquire Operand 1");
      cfg.role = ROLE_NONE;
    end

    // ---------- 4. gather load ----------
    begin
      flit_t b1, b2; logic [31:0] mine;
      cfg.gather_member = 1; cfg.gather_grp = 16'd7; cfg.gather_slot = 4'd2;
      mine = $urandom;
      inq[PORT_W].push_back(mkhead(PKT_GATHER, 5, 2, 7, 0, 0, 0));
      b1.ftype = FT_BODY; b1.vc = 0; b1.data = {32'h3, 32'h2, 32'h1, 32'h0}; inq[PORT_W].push_back(b1);
      b2.ftype = FT_TAIL; b2.vc = 0; b2.data = {32'h7, 32'h6, 32'h5, 32'h4}; inq[PORT_W].push_back(b2);
      repeat (15) @(posedge clk);
      chk(outq[PORT_E].size() == 1, "gather body held until payload ready");
      @(negedge clk); pl_v = 1; pl_d = mine;
      wait (pl_ack); @(negedge clk); pl_v = 0;
      repeat (15) @(posedge clk);
      chk(outq[PORT_E].size() == 3, "gather packet forwarded");
      if (outq[PORT_E].size() == 3) begin
        chk(outq[PORT_E][1].data == {32'h3, mine, 32'h1, 32'h0}, "payload in slot 2");
        chk(outq[PORT_E][2].data == b2.data, "other body flit unchanged");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_ina_stall = 0, n_ld_stall = 0, n_sum = 0, n_load = 0;
  always @(posedge clk) if (rst_n) begin
    if (ina_stall) n_ina_stall++;
    if (ld_stall) n_ld_stall++;
    if (ina_sum) n_sum++;
    if (load_evt) n_load++;
  end
  final $display("events: ina_stall=%0d ld_stall=%0d ina_sum=%0d load=%0d", n_ina_stall, n_ld_stall, n_sum, n_load);
endmodule
