// ina_mesh: weight-stationary DNN accelerator fabric with in-network accumulation.
//
// MESH_X x MESH_Y nodes (8 x 8 in the paper's evaluation). Each node is an
// ina_router, a network_interface and LANES weight-stationary PEs (PEs per router,
// 1 by default). Neighbouring routers are joined by links with one register stage
// for flits and one for credits (the paper's 1-cycle link), so an uncontended hop
// costs 4 router cycles + 1 link cycle.
// When a filter does not fit in one PE, its weights are split over several PEs
// along a path; the first PE's NI starts an INA packet with its psum, every further
// PE on the path adds its psum inside its router, and the sum leaves the chain at
// the packet's destination, where it either becomes a gather payload or goes out on
// host_*. Gather packets collect one payload per member node and end at their
// destination, whose flits also leave on host_*.
// Interfaces without a design in the paper are top-level ports: the per-node
// configuration from the central controller (cfg, flush, pe_clear), the weight and
// activation streams from the streaming units (w_*, a_*), and the ejected flits
// towards the global buffer (host_*). ev_* are one-cycle event pulses per node for
// statistics. Link boundaries at the mesh edge are tied off (XY routing never uses
// them).
module ina_mesh
  import ina_pkg::*;
#(
  parameter int unsigned MESH_X    = 8,
  parameter int unsigned MESH_Y    = 8,
  parameter int unsigned LANES     = 1,
  parameter int unsigned MEM_BYTES = 32768
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  cfg_t                 cfg      [MESH_Y][MESH_X],
  input  logic                 flush,
  input  logic                 pe_clear,
  input  logic                 w_valid  [MESH_Y][MESH_X][LANES],
  input  logic [PAYLOAD_W-1:0] w_data   [MESH_Y][MESH_X][LANES],
  output logic                 w_ready  [MESH_Y][MESH_X][LANES],
  input  logic                 a_valid  [MESH_Y][MESH_X],
  input  logic [PAYLOAD_W-1:0] a_data   [MESH_Y][MESH_X],
  output logic                 a_ready  [MESH_Y][MESH_X],
  output logic                 host_valid[MESH_Y][MESH_X],
  output flit_t                host_flit [MESH_Y][MESH_X],
  output logic                 ev_ina_sum   [MESH_Y][MESH_X],
  output logic                 ev_load      [MESH_Y][MESH_X],
  output logic                 ev_ina_stall [MESH_Y][MESH_X],
  output logic                 ev_ld_stall  [MESH_Y][MESH_X],
  output logic                 ev_ina_inj   [MESH_Y][MESH_X],
  output logic                 ev_gather_inj[MESH_Y][MESH_X]
);
  localparam int unsigned P = NUM_PORTS;

  // router outputs and their link registers
  logic  ro_v  [MESH_Y][MESH_X][P];
  flit_t ro_f  [MESH_Y][MESH_X][P];
  logic  rc_v  [MESH_Y][MESH_X][P];
  logic  rc_vc [MESH_Y][MESH_X][P];
  logic  lk_v  [MESH_Y][MESH_X][P];
  flit_t lk_f  [MESH_Y][MESH_X][P];
  logic  lk_cv [MESH_Y][MESH_X][P];
  logic  lk_cvc[MESH_Y][MESH_X][P];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int y = 0; y < MESH_Y; y++)
        for (int x = 0; x < MESH_X; x++)
          for (int p = 0; p < P; p++) begin
            lk_v[y][x][p]   <= 1'b0;
            lk_f[y][x][p]   <= '0;
            lk_cv[y][x][p]  <= 1'b0;
            lk_cvc[y][x][p] <= 1'b0;
          end
    end else begin
      for (int y = 0; y < MESH_Y; y++)
        for (int x = 0; x < MESH_X; x++)
          for (int p = 1; p < P; p++) begin   // port L has no link stage
            lk_v[y][x][p]   <= ro_v[y][x][p];
            lk_f[y][x][p]   <= ro_f[y][x][p];
            lk_cv[y][x][p]  <= rc_v[y][x][p];
            lk_cvc[y][x][p] <= rc_vc[y][x][p];
          end
    end
  end

  for (genvar y = 0; y < MESH_Y; y++) begin : g_y
    for (genvar x = 0; x < MESH_X; x++) begin : g_x
      logic  in_v  [P];
      flit_t in_f  [P];
      logic  ci_v  [P];
      logic  ci_vc [P];
      logic                       ni_inj_v, ni_ej_cv, ni_ej_cvc;
      flit_t                      ni_inj_f;
      logic                       op_v, op_ack, pl_v, pl_ack;
      logic [LANES*PAYLOAD_W-1:0] op_d, pl_d;
      logic [TAG_W-1:0]           op_t;
      logic [1:0]                 ina_st;

      // neighbour links: a port receives what the neighbour sends on the opposite port
      always_comb begin
        for (int p = 0; p < P; p++) begin
          in_v[p] = 1'b0; in_f[p] = '0; ci_v[p] = 1'b0; ci_vc[p] = 1'b0;
        end
        if (y > 0) begin
          in_v[PORT_N] = lk_v[y-1][x][PORT_S];  in_f[PORT_N]  = lk_f[y-1][x][PORT_S];
          ci_v[PORT_N] = lk_cv[y-1][x][PORT_S]; ci_vc[PORT_N] = lk_cvc[y-1][x][PORT_S];
        end
        if (y < MESH_Y - 1) begin
          in_v[PORT_S] = lk_v[y+1][x][PORT_N];  in_f[PORT_S]  = lk_f[y+1][x][PORT_N];
          ci_v[PORT_S] = lk_cv[y+1][x][PORT_N]; ci_vc[PORT_S] = lk_cvc[y+1][x][PORT_N];
        end
        if (x > 0) begin
          in_v[PORT_W] = lk_v[y][x-1][PORT_E];  in_f[PORT_W]  = lk_f[y][x-1][PORT_E];
          ci_v[PORT_W] = lk_cv[y][x-1][PORT_E]; ci_vc[PORT_W] = lk_cvc[y][x-1][PORT_E];
        end
        if (x < MESH_X - 1) begin
          in_v[PORT_E] = lk_v[y][x+1][PORT_W];  in_f[PORT_E]  = lk_f[y][x+1][PORT_W];
          ci_v[PORT_E] = lk_cv[y][x+1][PORT_W]; ci_vc[PORT_E] = lk_cvc[y][x+1][PORT_W];
        end
        in_v[PORT_L]  = ni_inj_v;
        in_f[PORT_L]  = ni_inj_f;
        ci_v[PORT_L]  = ni_ej_cv;
        ci_vc[PORT_L] = ni_ej_cvc;
      end


      ina_router #(.LANES(LANES)) u_router (
        .clk, .rst_n, .cur_x(COORD_W'(x)), .cur_y(COORD_W'(y)), .cfg(cfg[y][x]), .flush,
        .in_valid(in_v), .in_flit(in_f),
        .credit_out_valid(rc_v[y][x]), .credit_out_vc(rc_vc[y][x]),
        .out_valid(ro_v[y][x]), .out_flit(ro_f[y][x]),
        .credit_in_valid(ci_v), .credit_in_vc(ci_vc),
        .ni_op_valid(op_v), .ni_op_data(op_d), .ni_op_tag(op_t), .ni_op_ack(op_ack),
        .ni_pl_valid(pl_v), .ni_pl_data(pl_d), .ni_pl_ack(pl_ack),
        .ina_sum(ev_ina_sum[y][x]), .load_evt(ev_load[y][x]),
        .ina_stall(ev_ina_stall[y][x]), .ld_stall(ev_ld_stall[y][x]), .ina_state(ina_st)
      );

      // PEs of this node: they share the activation stream and finish together
      logic                       lane_a_ready[LANES];
      logic                       lane_res_v  [LANES];
      logic [PAYLOAD_W-1:0]       lane_res_d  [LANES];
      logic [TAG_W-1:0]           lane_res_t  [LANES];
      logic                       all_a_ready, all_res_v, res_ready;
      logic [LANES*PAYLOAD_W-1:0] res_d;

      always_comb begin
        all_a_ready = 1'b1;
        all_res_v   = 1'b1;
        for (int l = 0; l < LANES; l++) begin
          all_a_ready = all_a_ready && lane_a_ready[l];
          all_res_v   = all_res_v && lane_res_v[l];
          res_d[l*PAYLOAD_W +: PAYLOAD_W] = lane_res_d[l];
        end
      end
      assign a_ready[y][x] = all_a_ready;

      for (genvar l = 0; l < LANES; l++) begin : g_pe
        pe #(.Q(PAYLOAD_W), .MEM_BYTES(MEM_BYTES), .TAG_W(TAG_W)) u_pe (
          .clk, .rst_n, .clear(pe_clear), .nweights(cfg[y][x].nweights),
          .w_valid(w_valid[y][x][l]), .w_data(w_data[y][x][l]), .w_ready(w_ready[y][x][l]),
          .a_valid(a_valid[y][x] && all_a_ready), .a_data(a_data[y][x]), .a_ready(lane_a_ready[l]),
          .res_valid(lane_res_v[l]), .res_data(lane_res_d[l]), .res_tag(lane_res_t[l]),
          .res_ready(res_ready && all_res_v)
        );
      end

      network_interface #(.LANES(LANES)) u_ni (
        .clk, .rst_n, .cur_x(COORD_W'(x)), .cur_y(COORD_W'(y)), .cfg(cfg[y][x]),
        .pe_res_valid(all_res_v), .pe_res_data(res_d), .pe_res_tag(lane_res_t[0]),
        .pe_res_ready(res_ready),
        .inj_valid(ni_inj_v), .inj_flit(ni_inj_f),
        .inj_credit_valid(rc_v[y][x][PORT_L]), .inj_credit_vc(rc_vc[y][x][PORT_L]),
        .ej_valid(ro_v[y][x][PORT_L]), .ej_flit(ro_f[y][x][PORT_L]),
        .ej_credit_valid(ni_ej_cv), .ej_credit_vc(ni_ej_cvc),
        .op_valid(op_v), .op_data(op_d), .op_tag(op_t), .op_ack,
        .pl_valid(pl_v), .pl_data(pl_d), .pl_ack,
        .host_valid(host_valid[y][x]), .host_flit(host_flit[y][x]),
        .ina_injected(ev_ina_inj[y][x]), .gather_injected(ev_gather_inj[y][x])
      );
    end
  end
endmodule
