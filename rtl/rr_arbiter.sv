// rr_arbiter: round-robin arbiter over N requesters.
//
// grant is one-hot (or zero when nothing is requested). The search starts one past
// the last granted requester; the pointer moves only when `advance` is high, so a
// grant that is not used does not lose its turn. Used by the VC and switch
// allocators; the paper does not specify the arbitration policy.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] grant
);
  logic [$clog2(N > 1 ? N : 2)-1:0] last;

  always_comb begin
    grant = '0;
    for (int unsigned k = 1; k <= N; k++) begin
      int unsigned idx;
      idx = (int'(last) + k) % N;
      if (req[idx] && (grant == '0)) grant[idx] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last <= $bits(last)'(N - 1);
    else if (advance && (grant != '0)) begin
      for (int unsigned i = 0; i < N; i++)
        if (grant[i]) last <= $bits(last)'(i);
    end
  end
endmodule
