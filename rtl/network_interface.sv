// network_interface: the NI between the PE(s) of a node and the router's local port.
//
// Result path, chosen by the node's role (set by the controller per layer):
//   ROLE_INA_INIT   - the PE result starts an INA packet: a head to ina_dst with the
//                     result tag, then a tail flit carrying the LANES psums;
//   ROLE_INA_MEMBER - the PE result is offered to the router's INA control as
//                     operand 1 (op_*), to be added to a passing INA packet;
//   ROLE_NONE       - the result becomes the node's gather payload.
// Gather payload (pl_*): taken either by the router's load signal generator
// (gather_member) or, at a gather_init node, sent as a new gather packet to
// gather_dst: a head (tag = gather group) and gather_body body flits, the last a
// tail, with the payload already in this node's slot.
// Ejection: flits from the router are buffered per VC (BUF_DEPTH) and drained one
// per cycle. The summed payload of an INA packet ending here becomes the node's
// gather payload when the node takes part in a gather, otherwise it is passed out
// on host_* like every other ejected flit (towards the global buffer).
// Injection and ejection use credit flow control with the router. The packet
// formats and this role scheme are this design's choices; the paper says only that
// the controller decides which node initiates the INA packet.
module network_interface
  import ina_pkg::*;
#(
  parameter int unsigned LANES = 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [COORD_W-1:0]         cur_x,
  input  logic [COORD_W-1:0]         cur_y,
  input  cfg_t                       cfg,
  // PE results
  input  logic                       pe_res_valid,
  input  logic [LANES*PAYLOAD_W-1:0] pe_res_data,
  input  logic [TAG_W-1:0]           pe_res_tag,
  output logic                       pe_res_ready,
  // injection into router port L
  output logic                       inj_valid,
  output flit_t                      inj_flit,
  input  logic                       inj_credit_valid,
  input  logic                       inj_credit_vc,
  // ejection from router port L
  input  logic                       ej_valid,
  input  flit_t                      ej_flit,
  output logic                       ej_credit_valid,
  output logic                       ej_credit_vc,
  // INA operand 1 to the router
  output logic                       op_valid,
  output logic [LANES*PAYLOAD_W-1:0] op_data,
  output logic [TAG_W-1:0]           op_tag,
  input  logic                       op_ack,
  // gather payload to the router
  output logic                       pl_valid,
  output logic [LANES*PAYLOAD_W-1:0] pl_data,
  input  logic                       pl_ack,
  // ejected flits for the global-buffer side
  output logic                       host_valid,
  output flit_t                      host_flit,
  // statistics
  output logic                       ina_injected,
  output logic                       gather_injected
);
  localparam int unsigned CW = $clog2(BUF_DEPTH + 1);
  localparam int unsigned NODES_PER_FLIT = SLOTS / LANES;
  localparam int unsigned MAXF = 16;

  // ---------------- gather payload register ----------------
  logic ej_to_pl, res_to_pl;
  logic ina_start, gather_start;
  logic [LANES*PAYLOAD_W-1:0] ej_sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pl_valid <= 1'b0;
      pl_data  <= '0;
    end else begin
      if (ej_to_pl) begin
        pl_valid <= 1'b1;
        pl_data  <= ej_sum;
      end else if (res_to_pl) begin
        pl_valid <= 1'b1;
        pl_data  <= pe_res_data;
      end else if (pl_valid && (pl_ack || gather_start)) begin
        pl_valid <= 1'b0;
      end
    end
  end

  // ---------------- injection ----------------
  logic [CW-1:0] cred [NUM_VC];
  logic          busy;
  logic          cur_vc;
  logic [4:0]    nflits, fidx;
  flit_t         flits [MAXF];
  logic          send;


  assign ina_start    = !busy && (cfg.role == ROLE_INA_INIT) && pe_res_valid;
  assign gather_start = !busy && !ina_start && cfg.gather_init && pl_valid;
  assign send         = busy && (cred[cur_vc] != '0);
  assign inj_valid    = send;
  assign inj_flit     = flits[fidx[3:0]];
  assign ina_injected    = ina_start;
  assign gather_injected = gather_start;

  always_comb begin
    op_valid = (cfg.role == ROLE_INA_MEMBER) && pe_res_valid;
    op_data  = pe_res_data;
    op_tag   = pe_res_tag;
    unique case (cfg.role)
      ROLE_INA_INIT:   pe_res_ready = ina_start;
      ROLE_INA_MEMBER: pe_res_ready = op_ack;
      default:         pe_res_ready = res_to_pl;
    endcase
  end
  assign res_to_pl = (cfg.role == ROLE_NONE) && pe_res_valid && !pl_valid && !ej_to_pl;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      cur_vc <= 1'b0;
      nflits <= '0;
      fidx   <= '0;
      for (int i = 0; i < MAXF; i++) flits[i] <= '0;
      for (int v = 0; v < NUM_VC; v++) cred[v] <= CW'(BUF_DEPTH);
    end else begin
      if (ina_start || gather_start) begin
        head_t h;
        h       = '0;
        h.ptype = ina_start ? PKT_INA : PKT_GATHER;
        h.dst_x = ina_start ? cfg.ina_dst_x : cfg.gather_dst_x;
        h.dst_y = ina_start ? cfg.ina_dst_y : cfg.gather_dst_y;
        h.src_x = cur_x;
        h.src_y = cur_y;
        h.tag   = ina_start ? pe_res_tag : cfg.gather_grp;
        busy    <= 1'b1;
        fidx    <= '0;
        cur_vc  <= ~cur_vc;
        for (int i = 0; i < MAXF; i++) flits[i] <= '0;
        flits[0].ftype <= FT_HEAD;
        flits[0].vc    <= ~cur_vc;
        flits[0].data  <= h;
        if (ina_start) begin
          nflits          <= 5'd2;
          flits[1].ftype  <= FT_TAIL;
          flits[1].vc     <= ~cur_vc;
          flits[1].data   <= FLIT_W'(pe_res_data);
        end else begin
          int unsigned fi, base;
          nflits <= 5'(cfg.gather_body) + 5'd1;
          for (int i = 1; i < MAXF; i++) begin
            flits[i].ftype <= (i == int'(cfg.gather_body)) ? FT_TAIL : FT_BODY;
            flits[i].vc    <= ~cur_vc;
          end
          fi   = 1 + int'(cfg.gather_slot) / NODES_PER_FLIT;
          base = (int'(cfg.gather_slot) % NODES_PER_FLIT) * LANES;
          for (int i = 0; i < LANES; i++)
            flits[fi].data[(base + i)*PAYLOAD_W +: PAYLOAD_W] <= pl_data[i*PAYLOAD_W +: PAYLOAD_W];
        end
      end else if (send) begin
        fidx <= fidx + 1'b1;
        if (fidx + 1'b1 == nflits) busy <= 1'b0;
      end
      for (int v = 0; v < NUM_VC; v++)
        cred[v] <= cred[v] + CW'(inj_credit_valid && (int'(inj_credit_vc) == v))
                           - CW'(send && (int'(cur_vc) == v));
    end
  end

  // ---------------- ejection ----------------
  flit_t        ej_front [NUM_VC];
  logic         ej_empty [NUM_VC];
  logic [NUM_VC-1:0] ej_pop;
  pkt_e         ej_ptype [NUM_VC];
  logic         rr;
  logic         pick_ok;
  logic         pick;
  flit_t        pf;
  pkt_e         pt;
  logic         to_pl_role;

  for (genvar v = 0; v < NUM_VC; v++) begin : g_ej
    logic full;
    logic [CW-1:0] cnt;
    vc_fifo #(.DEPTH(BUF_DEPTH), .W($bits(flit_t))) u_fifo (
      .clk, .rst_n, .push(ej_valid && (int'(ej_flit.vc) == v)), .wr_data(ej_flit),
      .pop(ej_pop[v]), .rd_data(ej_front[v]), .empty(ej_empty[v]), .full, .count(cnt)
    );
  end

  assign to_pl_role = cfg.gather_member || cfg.gather_init;

  always_comb begin
    head_t h;
    // alternate between the VCs, skipping an empty one
    pick = (rr && !ej_empty[1]) || ej_empty[0];
    pf   = ej_front[int'(pick)];
    h    = head_t'(pf.data);
    pt   = is_head(pf.ftype) ? h.ptype : ej_ptype[int'(pick)];
    pick_ok = !ej_empty[int'(pick)];
    // an INA sum for the gather payload waits for a free payload register
    if ((pt == PKT_INA) && !is_head(pf.ftype) && to_pl_role && pl_valid) pick_ok = 1'b0;
    ej_pop   = '0;
    if (pick_ok) ej_pop[int'(pick)] = 1'b1;
    ej_to_pl = pick_ok && (pt == PKT_INA) && !is_head(pf.ftype) && to_pl_role;
    ej_sum   = pf.data[LANES*PAYLOAD_W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr              <= 1'b0;
      ej_credit_valid <= 1'b0;
      ej_credit_vc    <= 1'b0;
      host_valid      <= 1'b0;
      host_flit       <= '0;
      for (int v = 0; v < NUM_VC; v++) ej_ptype[v] <= PKT_UNICAST;
    end else begin
      rr              <= ~rr;
      ej_credit_valid <= pick_ok;
      ej_credit_vc    <= pick;
      host_valid      <= pick_ok && !((pt == PKT_INA) && to_pl_role);
      host_flit       <= pf;
      if (pick_ok && is_head(pf.ftype)) ej_ptype[int'(pick)] <= pt;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(ej_to_pl && res_to_pl))
    else $error("two writers of the gather payload");
endmodule
