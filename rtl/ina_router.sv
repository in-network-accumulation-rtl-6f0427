// ina_router: five-port virtual-channel router with in-network accumulation.
//
// Ports L (network interface), N, S, E, W; NUM_VC virtual channels of BUF_DEPTH
// flits per input; wormhole switching with credit flow control; XY routing.
// Pipeline (an uncontended flit entering at cycle t is on out_* at t+4, matching
// the paper's 4-cycle router):
//   BW    - flit written into its VC buffer;
//   RC/VA - a head at the front computes its route and gets a downstream VC;
//   SA    - switch allocation; the winner is popped, a credit is consumed;
//   ST    - crossbar traversal into the output register.
// Added for INA (paper's router and INA-block figures): the INA block sits beside
// the crossbar in ST. A node configured as an INA member hands its psum to
// ina_control as operand 1. The payload flit of an INA packet arriving from a
// neighbour is held in its buffer until operand 1 is held; if its tag matches, its
// switch grant is operand 2 and in ST the flit leaves with psum = op1 + op2
// instead of its own payload. INA packets of other tags pass unchanged. The
// accumulation therefore needs no ejection to and re-injection from the PE.
// Also added, from the gather router the paper builds on: the load signal
// generator and the payload generator, which insert the node's payload into its
// slot of a passing gather packet.
// Event outputs (ina_sum, load_evt, ina_stall, ld_stall) are pulses for
// statistics. The base router's internals are this design's choices: the paper
// takes its router from earlier work and describes only the INA additions.
module ina_router
  import ina_pkg::*;
#(
  parameter int unsigned LANES = 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [COORD_W-1:0]         cur_x,
  input  logic [COORD_W-1:0]         cur_y,
  input  cfg_t                       cfg,
  input  logic                       flush,
  // links, indexed by port_e
  input  logic                       in_valid        [NUM_PORTS],
  input  flit_t                      in_flit         [NUM_PORTS],
  output logic                       credit_out_valid[NUM_PORTS],
  output logic                       credit_out_vc   [NUM_PORTS],
  output logic                       out_valid       [NUM_PORTS],
  output flit_t                      out_flit        [NUM_PORTS],
  input  logic                       credit_in_valid [NUM_PORTS],
  input  logic                       credit_in_vc    [NUM_PORTS],
  // INA operand from the NI
  input  logic                       ni_op_valid,
  input  logic [LANES*PAYLOAD_W-1:0] ni_op_data,
  input  logic [TAG_W-1:0]           ni_op_tag,
  output logic                       ni_op_ack,
  // gather payload from the NI
  input  logic                       ni_pl_valid,
  input  logic [LANES*PAYLOAD_W-1:0] ni_pl_data,
  output logic                       ni_pl_ack,
  // statistics
  output logic                       ina_sum,
  output logic                       load_evt,
  output logic                       ina_stall,
  output logic                       ld_stall,
  output logic [1:0]                 ina_state
);
  localparam int unsigned P = NUM_PORTS;
  localparam int unsigned V = NUM_VC;
  localparam int unsigned CW = $clog2(BUF_DEPTH + 1);

  // ---------------- input units ----------------
  flit_t      front   [P][V];
  logic       nonempty[P][V];
  logic       va_req  [P][V];
  port_e      va_port [P][V];
  logic       va_grant[P][V];
  logic       va_outvc[P][V];
  logic       active  [P][V];
  port_e      route   [P][V];
  logic       outvc   [P][V];
  pkt_e       ptype   [P][V];
  logic [TAG_W-1:0] tag [P][V];
  logic [3:0] pos     [P][V];
  logic [V-1:0] pop   [P];

  for (genvar p = 0; p < P; p++) begin : g_in
    input_unit u_in (
      .clk, .rst_n, .cur_x, .cur_y,
      .in_valid(in_valid[p]), .in_flit(in_flit[p]),
      .credit_valid(credit_out_valid[p]), .credit_vc(credit_out_vc[p]),
      .front(front[p]), .nonempty(nonempty[p]),
      .va_req(va_req[p]), .va_port(va_port[p]), .va_grant(va_grant[p]), .va_outvc(va_outvc[p]),
      .active(active[p]), .route(route[p]), .outvc(outvc[p]),
      .ptype(ptype[p]), .tag(tag[p]), .pos(pos[p]), .pop(pop[p])
    );
  end

  // ---------------- credits towards the downstream buffers ----------------
  logic [CW-1:0] credits[P][V];

  // ---------------- VC allocation ----------------
  logic rel_valid[P];
  logic rel_vc   [P];
  logic vc_busy  [P][V];

  vc_allocator u_va (
    .clk, .rst_n, .req(va_req), .req_port(va_port), .grant(va_grant), .grant_vc(va_outvc),
    .release_valid(rel_valid), .release_vc(rel_vc), .busy(vc_busy)
  );

  // ---------------- INA control ----------------
  logic [1:0]                 ina_st;
  logic [LANES*PAYLOAD_W-1:0] op1_data;
  logic [TAG_W-1:0]           op1_tag;
  logic                       op2_ready;
  logic                       result_sent;
  logic                       ina_hold[P][V];
  logic                       ina_pick[P][V];

  ina_control #(.LANES(LANES)) u_ctl (
    .clk, .rst_n,
    .ni_valid(ni_op_valid), .ni_is_ina(cfg.role == ROLE_INA_MEMBER),
    .ni_data(ni_op_data), .ni_tag(ni_op_tag), .ni_ack(ni_op_ack),
    .op2_ready, .flush, .result_sent,
    .state(ina_st), .op1_data, .op1_tag
  );
  assign ina_state = ina_st;

  // INA payload flits from neighbours: held until operand 1 is present; the first
  // one with a matching tag becomes operand 2.
  always_comb begin
    logic found;
    found = 1'b0;
    for (int p = 0; p < P; p++)
      for (int v = 0; v < V; v++) begin
        logic cand;
        cand = (cfg.role == ROLE_INA_MEMBER) && (p != int'(PORT_L)) && active[p][v] &&
               nonempty[p][v] && (ptype[p][v] == PKT_INA) && !is_head(front[p][v].ftype) &&
               (route[p][v] != PORT_L);
        ina_pick[p][v] = 1'b0;
        ina_hold[p][v] = 1'b0;
        if (cand) begin
          if (ina_st != 2'd1) ina_hold[p][v] = 1'b1;            // not in ACQ_OP2
          else if (tag[p][v] == op1_tag) begin
            if (found) ina_hold[p][v] = 1'b1;
            else begin
              found          = 1'b1;
              ina_pick[p][v] = 1'b1;
            end
          end
        end
      end
  end

  // ---------------- load signal generator ----------------
  logic  ld_hold[P][V];
  logic  sa_grant[P][V];
  logic  load;
  port_e load_port;

  load_signal_generator #(.LANES(LANES)) u_lsg (
    .member(cfg.gather_member), .grp(cfg.gather_grp), .slot(cfg.gather_slot),
    .pl_valid(ni_pl_valid),
    .cand_active(active), .cand_nonempty(nonempty), .cand_ptype(ptype), .cand_tag(tag),
    .cand_pos(pos), .sa_grant(sa_grant), .hold(ld_hold), .load, .load_port
  );

  // ---------------- switch allocation ----------------
  logic       sa_req  [P][V];
  logic       sa_oval [P];
  logic [2:0] sa_osel [P];

  always_comb begin
    for (int p = 0; p < P; p++)
      for (int v = 0; v < V; v++)
        sa_req[p][v] = active[p][v] && nonempty[p][v] &&
                       (credits[int'(route[p][v])][int'(outvc[p][v])] != '0) &&
                       !ina_hold[p][v] && !ld_hold[p][v];
  end

  switch_allocator u_sa (
    .clk, .rst_n, .req(sa_req), .req_port(route), .grant(sa_grant),
    .out_valid(sa_oval), .out_sel(sa_osel)
  );

  always_comb begin
    op2_ready = 1'b0;
    for (int p = 0; p < P; p++) begin
      pop[p] = '0;
      for (int v = 0; v < V; v++) begin
        pop[p][v] = sa_grant[p][v];
        if (sa_grant[p][v] && ina_pick[p][v]) op2_ready = 1'b1;
      end
    end
  end

  // release of downstream VCs by tails, credit consumption
  always_comb begin
    for (int o = 0; o < P; o++) begin
      rel_valid[o] = 1'b0;
      rel_vc[o]    = 1'b0;
    end
    for (int p = 0; p < P; p++)
      for (int v = 0; v < V; v++)
        if (sa_grant[p][v] && is_tail(front[p][v].ftype)) begin
          rel_valid[int'(route[p][v])] = 1'b1;
          rel_vc[int'(route[p][v])]    = outvc[p][v];
        end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < P; o++)
        for (int k = 0; k < V; k++) credits[o][k] <= CW'(BUF_DEPTH);
    end else begin
      for (int o = 0; o < P; o++)
        for (int k = 0; k < V; k++) begin
          logic dec, inc;
          dec = 1'b0;
          for (int p = 0; p < P; p++)
            for (int v = 0; v < V; v++)
              if (sa_grant[p][v] && (int'(route[p][v]) == o) && (int'(outvc[p][v]) == k)) dec = 1'b1;
          inc = credit_in_valid[o] && (int'(credit_in_vc[o]) == k);
          credits[o][k] <= credits[o][k] + CW'(inc) - CW'(dec);
        end
    end
  end

  // ---------------- SA -> ST pipeline registers ----------------
  flit_t      st_flit [P];
  logic       xb_en   [P];
  logic [2:0] xb_sel  [P];
  logic       st_ina;
  port_e      st_ina_in, st_ina_out;
  logic       st_ld;
  port_e      st_ld_in;
  logic [LANES*PAYLOAD_W-1:0] st_ld_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < P; p++) begin
        st_flit[p] <= '0;
        xb_en[p]   <= 1'b0;
        xb_sel[p]  <= '0;
      end
      st_ina     <= 1'b0;
      st_ina_in  <= PORT_L;
      st_ina_out <= PORT_L;
      st_ld      <= 1'b0;
      st_ld_in   <= PORT_L;
      st_ld_data <= '0;
    end else begin
      for (int o = 0; o < P; o++) begin
        xb_en[o]  <= sa_oval[o];
        xb_sel[o] <= sa_osel[o];
      end
      st_ina <= 1'b0;
      for (int p = 0; p < P; p++)
        for (int v = 0; v < V; v++)
          if (sa_grant[p][v]) begin
            st_flit[p]    <= front[p][v];
            st_flit[p].vc <= outvc[p][v];
            if (ina_pick[p][v]) begin
              st_ina     <= 1'b1;
              st_ina_in  <= port_e'(p);
              st_ina_out <= route[p][v];
            end
          end
      st_ld <= load;
      if (load) begin
        st_ld_in   <= load_port;
        st_ld_data <= ni_pl_data;
      end
    end
  end

  assign ni_pl_ack = load;

  // ---------------- ST: payload generator, crossbar, INA block ----------------
  flit_t xb_in  [P];
  logic  xb_oval[P];
  flit_t xb_out [P];
  flit_t pg_out;
  logic  ina_oval[P];
  flit_t ina_out [P];
  logic [LANES*PAYLOAD_W-1:0] psum;

  payload_generator #(.LANES(LANES)) u_pg (
    .flit_in(st_flit[int'(st_ld_in)]), .load(st_ld), .slot(cfg.gather_slot),
    .payload(st_ld_data), .flit_out(pg_out)
  );

  always_comb begin
    for (int p = 0; p < P; p++)
      xb_in[p] = (st_ld && (int'(st_ld_in) == p)) ? pg_out : st_flit[p];
  end

  crossbar u_xb (
    .in_flit(xb_in), .en(xb_en), .sel(xb_sel), .out_valid(xb_oval), .out_flit(xb_out)
  );

  ina_block #(.LANES(LANES)) u_ina (
    .en(st_ina), .op1(op1_data), .in_flit(st_flit), .op2_sel(st_ina_in), .out_sel(st_ina_out),
    .out_valid(ina_oval), .out_flit(ina_out), .psum
  );

  assign result_sent = st_ina;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < P; o++) begin
        out_valid[o] <= 1'b0;
        out_flit[o]  <= '0;
      end
    end else begin
      for (int o = 0; o < P; o++) begin
        out_valid[o] <= xb_oval[o];
        out_flit[o]  <= ina_oval[o] ? ina_out[o] : xb_out[o];
      end
    end
  end

  // ---------------- statistics ----------------
  always_comb begin
    ina_stall = 1'b0;
    ld_stall  = 1'b0;
    for (int p = 0; p < P; p++)
      for (int v = 0; v < V; v++) begin
        if (ina_hold[p][v]) ina_stall = 1'b1;
        if (ld_hold[p][v])  ld_stall  = 1'b1;
      end
  end
  assign ina_sum  = st_ina;
  assign load_evt = st_ld;

  for (genvar o = 0; o < P; o++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
                     credits[o][0] <= CW'(BUF_DEPTH) && credits[o][1] <= CW'(BUF_DEPTH))
      else $error("credit counter above buffer depth");
  end
endmodule
