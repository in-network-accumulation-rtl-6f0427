// tb_input_unit: sends random packets (1-4 flits) on both VCs of one input port,
// never more flits than the credits it holds, and plays the allocators: it grants
// VC requests and pops active VCs at random. Checks flit order per VC, the XY route
// and header fields latched at VC allocation, the position counter, that a VC
// returns to idle after its tail, and that every pop returns a credit for the
// right VC one cycle later.
module tb_input_unit;
  import ina_pkg::*;
  localparam int V = NUM_VC;
  logic clk = 0, rst_n = 0;
  logic in_valid, credit_valid, credit_vc;
  flit_t in_flit;
  flit_t front[V];
  logic nonempty[V], va_req[V], va_grant[V], va_outvc[V], active[V], outvc[V];
  port_e va_port[V], route[V];
  pkt_e ptype[V];
  logic [TAG_W-1:0] tag[V];
  logic [3:0] pos[V];
  logic [V-1:0] pop;
  flit_t q[V][$];
  int cred[V];
  int checks = 0, failures = 0, pkts_done = 0;
  int exp_pos[V];
  head_t cur_hd[V];

  input_unit dut (.clk, .rst_n, .cur_x(4'd3), .cur_y(4'd3), .in_valid, .in_flit, .credit_valid, .credit_vc,
    .front, .nonempty, .va_req, .va_port, .va_grant, .va_outvc, .active, .route, .outvc, .ptype, .tag, .pos, .pop);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 8) $display("%0t: %s", $time, what); end
  endtask

  function automatic port_e xy(head_t h);
    if (h.dst_x > 3) return PORT_E;
    if (h.dst_x < 3) return PORT_W;
    if (h.dst_y > 3) return PORT_S;
    if (h.dst_y < 3) return PORT_N;
    return PORT_L;
  endfunction

  // sender: random packets per VC, respecting credits
  int rem[V];
  initial begin
    in_valid = 0; in_flit = '0;
    for (int v = 0; v < V; v++) begin cred[v] = BUF_DEPTH; rem[v] = 0; end
    repeat (2) @(posedge clk); #1 rst_n = 1;
    forever begin
      int v;
      @(negedge clk);
      in_valid = 0;
      v = $urandom_range(0, V - 1);
      if (cred[v] > 0 && $urandom_range(0, 1) == 1) begin
        flit_t f; head_t h;
        f.vc = 1'(v);
        f.data = {$urandom, $urandom, $urandom, $urandom};
        if (rem[v] == 0) begin
          int len; len = $urandom_range(1, 4);
          h = head_t'(f.data); h.dst_x = 4'($urandom_range(0, 7)); h.dst_y = 4'($urandom_range(0, 7));
          h.ptype = pkt_e'($urandom_range(0, 2));
          f.data = h;
          f.ftype = (len == 1) ? FT_HEADTAIL : FT_HEAD;
          rem[v] = len - 1;
        end else begin
          rem[v]--;
          f.ftype = (rem[v] == 0) ? FT_TAIL : FT_BODY;
        end
        in_flit = f; in_valid = 1;
        cred[v]--;
        q[v].push_back(f);
      end
    end
  end

  // allocator side and checks
  initial begin
    for (int v = 0; v < V; v++) begin va_grant[v] = 0; va_outvc[v] = 0; exp_pos[v] = 0; end
    pop = '0;
    @(posedge rst_n);
    for (int t = 0; t < 8000; t++) begin
      int pv;
      @(negedge clk); #2;
      pop = '0;
      for (int v = 0; v < V; v++) begin
        va_grant[v] = 0;
        chk(nonempty[v] == (q[v].size() > 0) || (in_valid && int'(in_flit.vc) == v && q[v].size() == 1), "nonempty");
        if (nonempty[v]) chk(front[v] == q[v][0], "front flit order");
        if (va_req[v]) begin
          chk(!active[v] && is_head(front[v].ftype), "va_req only for idle head");
          chk(va_port[v] == xy(head_t'(front[v].data)), "route computation");
          if ($urandom_range(0, 1) == 1) begin
            va_grant[v] = 1; va_outvc[v] = 1'($urandom); cur_hd[v] = head_t'(front[v].data);
          end
        end
      end
      pv = $urandom_range(0, V - 1);
      if (active[pv] && nonempty[pv] && $urandom_range(0, 2) != 0) pop[pv] = 1'b1;
      @(posedge clk); #1;
      for (int v = 0; v < V; v++) begin
        if (va_grant[v]) begin
          chk(active[v] && route[v] == xy(cur_hd[v]) && outvc[v] == va_outvc[v] &&
              ptype[v] == cur_hd[v].ptype && tag[v] == cur_hd[v].tag, "latched at VA");
          exp_pos[v] = 0;
        end
        if (pop[v]) begin
          flit_t f; f = q[v].pop_front();
          cred[v]++;
          chk(credit_valid && int'(credit_vc) == v, "credit returned");
          if (is_tail(f.ftype)) begin chk(!active[v] && pos[v] == 0, "idle after tail"); pkts_done++; end
          else begin exp_pos[v]++; chk(int'(pos[v]) == exp_pos[v], "position counter"); end
        end
      end
      if (pop == '0) chk(!credit_valid, "spurious credit");
    end
    chk(pkts_done > 200, "too few packets");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
