// ina_control: control FSM of in-network accumulation.
//
// States and transitions are those of the paper's INA-control figure:
//   ACQ_OP1  --Operand1_Ready-->  ACQ_OP2  --Operand2_Ready-->  SUMMATION
//   ACQ_OP1 stays while the NI has no operand or it is not an INA operand;
//   ACQ_OP2 stays while input ports carry flits that are not operand 2;
//   ACQ_OP2 --Operand2_Invalid--> ACQ_OP1;  SUMMATION --Result_Sent--> ACQ_OP1.
// Operand 1 (psum and tag from the local NI) is registered on Operand1_Ready and
// acknowledged to the NI (ni_ack, one cycle). Operand2_Ready is raised by the
// router when an INA payload flit with the same tag wins the switch from a
// neighbour port; Result_Sent when the summed flit is written to the output
// register. Operand2_Invalid is not defined in the paper: here it is the
// controller's `flush`, which drops the held operand. The tag check is this
// design's way of pairing the two operands.
module ina_control
  import ina_pkg::*;
#(
  parameter int unsigned LANES = 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       ni_valid,    // NI presents an operand
  input  logic                       ni_is_ina,   // ... and it is an INA operand
  input  logic [LANES*PAYLOAD_W-1:0] ni_data,
  input  logic [TAG_W-1:0]           ni_tag,
  output logic                       ni_ack,
  input  logic                       op2_ready,   // Operand2_Ready
  input  logic                       flush,       // Operand2_Invalid
  input  logic                       result_sent, // Result_Sent
  output logic [1:0]                 state,
  output logic [LANES*PAYLOAD_W-1:0] op1_data,
  output logic [TAG_W-1:0]           op1_tag
);
  typedef enum logic [1:0] {ACQ_OP1 = 2'd0, ACQ_OP2 = 2'd1, SUMMATION = 2'd2} st_e;
  st_e st, st_nx;

  assign state  = st;
  assign ni_ack = (st == ACQ_OP1) && ni_valid && ni_is_ina;

  always_comb begin
    st_nx = st;
    unique case (st)
      ACQ_OP1:   if (ni_valid && ni_is_ina) st_nx = ACQ_OP2;
      ACQ_OP2:   if (flush) st_nx = ACQ_OP1;
                 else if (op2_ready) st_nx = SUMMATION;
      SUMMATION: if (result_sent) st_nx = ACQ_OP1;
      default:   st_nx = ACQ_OP1;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= ACQ_OP1;
      op1_data <= '0;
      op1_tag  <= '0;
    end else begin
      st <= st_nx;
      if (ni_ack) begin
        op1_data <= ni_data;
        op1_tag  <= ni_tag;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) op2_ready |-> (st == ACQ_OP2))
    else $error("operand 2 arrived outside ACQ_OP2");
endmodule
