// pe: weight-stationary multiply-accumulate processing element.
//
// The PE first receives its share of a filter, x = nweights words, over the weight
// stream and keeps it in local memory (MEM_BYTES, 32 KB in the paper). Only then
// does it accept input activations: the i-th activation of a vector is multiplied
// by weight i and accumulated, one MAC per cycle. After x activations the partial
// sum of this PE's share of the dot product is offered on res_* with a tag counting
// the results since `clear`; new activations wait until the result is taken.
// A PE that holds the whole filter (one part) produces a final output activation;
// otherwise its result is one of several psums that the network accumulates.
// Numbers are Q-bit two's-complement integers, products and sums wrapping modulo
// 2^Q (the paper gives q = 32 bit, not the number format). Weight memory is an
// array with combinational read. `clear` restarts weight loading for a new layer.
module pe #(
  parameter int unsigned Q         = 32,
  parameter int unsigned MEM_BYTES = 32768,
  parameter int unsigned TAG_W     = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic [13:0]      nweights,   // x, 1 .. MEM_BYTES*8/Q
  input  logic             w_valid,
  input  logic [Q-1:0]     w_data,
  output logic             w_ready,
  input  logic             a_valid,
  input  logic [Q-1:0]     a_data,
  output logic             a_ready,
  output logic             res_valid,
  output logic [Q-1:0]     res_data,
  output logic [TAG_W-1:0] res_tag,
  input  logic             res_ready
);
  localparam int unsigned WORDS = MEM_BYTES * 8 / Q;
  localparam int unsigned AW    = $clog2(WORDS);

  logic [Q-1:0]  wmem [WORDS];
  logic [AW-1:0] wptr, aidx;
  logic          loaded;
  logic [Q-1:0]  acc, acc_nx;
  logic [AW-1:0] last;

  assign last    = AW'(nweights - 14'd1);
  assign w_ready = !loaded;
  assign a_ready = loaded && !res_valid;
  assign acc_nx  = ((aidx == '0) ? '0 : acc) + wmem[aidx] * a_data;

  always_ff @(posedge clk) begin
    if (w_valid && w_ready) wmem[wptr] <= w_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr      <= '0;
      aidx      <= '0;
      loaded    <= 1'b0;
      acc       <= '0;
      res_valid <= 1'b0;
      res_data  <= '0;
      res_tag   <= '0;
    end else if (clear) begin
      wptr      <= '0;
      aidx      <= '0;
      loaded    <= 1'b0;
      acc       <= '0;
      res_valid <= 1'b0;
      res_tag   <= '0;
    end else begin
      if (w_valid && w_ready) begin
        wptr <= wptr + 1'b1;
        if (wptr == last) loaded <= 1'b1;
      end
      if (a_valid && a_ready) begin
        acc <= acc_nx;
        if (aidx == last) begin
          aidx      <= '0;
          res_valid <= 1'b1;
          res_data  <= acc_nx;
        end else begin
          aidx <= aidx + 1'b1;
        end
      end
      if (res_valid && res_ready) begin
        res_valid <= 1'b0;
        res_tag   <= res_tag + 1'b1;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) res_valid |=> (res_valid || $past(res_ready)))
    else $error("result dropped");
endmodule
