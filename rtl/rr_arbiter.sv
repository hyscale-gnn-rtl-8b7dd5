// rr_arbiter -- round-robin arbiter.
//
// Grants at most one of N requesters per cycle. The search starts one place
// after the requester granted last, so every persistent request is granted
// within N cycles. `grant` is combinational from `req`; the priority pointer
// moves on the clock edge of a cycle that granted someone.
module rr_arbiter #(
  parameter int N = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  output logic [N-1:0] grant
);

  localparam int IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] last;

  always_comb begin
    grant = '0;
    for (int k = 1; k <= N; k++) begin
      if (req[(int'(last) + k) % N] && grant == '0) grant[(int'(last) + k) % N] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last <= IW'(N - 1);
    else begin
      for (int i = 0; i < N; i++)
        if (grant[i]) last <= IW'(i);
    end
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(grant));

endmodule
