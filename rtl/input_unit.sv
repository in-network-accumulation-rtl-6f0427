// input_unit: one router input port with NUM_VC virtual-channel buffers.
//
// Every arriving flit is written into the FIFO of the VC named in its sideband
// (buffer-write stage). Each VC runs a small state machine:
//   IDLE   - the front flit is a head: its route is computed combinationally and a
//            VC-allocation request is raised for that output port (RC+VA stage);
//   ACTIVE - a downstream VC is held; every flit of the packet may request the
//            switch. Popping the tail returns the VC to IDLE.
// The packet type and tag of the head are kept so the router can tell INA and
// gather packets apart while their later flits pass. `pos` counts the flits of the
// current packet already sent (0 = the head is at the front).
// A popped flit frees a buffer slot: credit_valid/credit_vc tell the upstream node
// one cycle later (registered). Credit-based flow control is this design's choice;
// the buffer depth and VC count follow the paper.
module input_unit
  import ina_pkg::*;
#(
  parameter int unsigned N_VC  = NUM_VC,
  parameter int unsigned DEPTH = BUF_DEPTH
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] cur_x,
  input  logic [COORD_W-1:0] cur_y,
  // link
  input  logic               in_valid,
  input  flit_t              in_flit,
  output logic               credit_valid,
  output logic               credit_vc,
  // to the allocators
  output flit_t              front   [N_VC],
  output logic               nonempty[N_VC],
  output logic               va_req  [N_VC],
  output port_e              va_port [N_VC],
  input  logic               va_grant[N_VC],
  input  logic               va_outvc[N_VC],
  output logic               active  [N_VC],
  output port_e              route   [N_VC],
  output logic               outvc   [N_VC],
  output pkt_e               ptype   [N_VC],
  output logic [TAG_W-1:0]   tag     [N_VC],
  output logic [3:0]         pos     [N_VC],
  input  logic [N_VC-1:0]    pop
);
  for (genvar v = 0; v < N_VC; v++) begin : g_vc
    logic  empty, full;
    logic [$clog2(DEPTH+1)-1:0] cnt;
    head_t hd;

    vc_fifo #(.DEPTH(DEPTH), .W($bits(flit_t))) u_fifo (
      .clk, .rst_n,
      .push   (in_valid && (in_flit.vc == 1'(v))),
      .wr_data(in_flit),
      .pop    (pop[v]),
      .rd_data(front[v]),
      .empty, .full, .count(cnt)
    );

    assign nonempty[v] = !empty;
    assign hd = head_t'(front[v].data);

    route_computation u_rc (
      .cur_x, .cur_y, .dst_x(hd.dst_x), .dst_y(hd.dst_y), .out_port(va_port[v])
    );

    assign va_req[v] = !active[v] && !empty && is_head(front[v].ftype);

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        active[v] <= 1'b0;
        route[v]  <= PORT_L;
        outvc[v]  <= 1'b0;
        ptype[v]  <= PKT_UNICAST;
        tag[v]    <= '0;
        pos[v]    <= '0;
      end else begin
        if (va_req[v] && va_grant[v]) begin
          active[v] <= 1'b1;
          route[v]  <= va_port[v];
          outvc[v]  <= va_outvc[v];
          ptype[v]  <= hd.ptype;
          tag[v]    <= hd.tag;
          pos[v]    <= '0;
        end
        if (pop[v]) begin
          if (is_tail(front[v].ftype)) begin
            active[v] <= 1'b0;
            pos[v]    <= '0;
          end else begin
            pos[v] <= pos[v] + 1'b1;
          end
        end
      end
    end

    assert property (@(posedge clk) disable iff (!rst_n) pop[v] |-> active[v])
      else $error("pop of an inactive VC");
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      credit_valid <= 1'b0;
      credit_vc    <= 1'b0;
    end else begin
      credit_valid <= |pop;
      credit_vc    <= 1'b0;
      for (int v = 0; v < N_VC; v++) if (pop[v]) credit_vc <= 1'(v);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(pop))
    else $error("more than one VC popped in a cycle");
endmodule
