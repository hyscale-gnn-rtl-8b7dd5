// routing_network -- crossbar from the scatter PEs to the gather PEs.
//
// Every scatter PE offers scaled beats tagged with their destination vertex.
// Destination vertices are interleaved over the gather PEs: gather PE k owns
// every vertex with dst mod N_PE == k, and stores it at row dst / N_PE of
// its intermediate-result buffer. For each output a round-robin arbiter picks
// one of the scatter PEs that address it; the others are held (in_ready low)
// and retry the next cycle, so no beat is lost and beats of one scatter PE
// stay in order. Outputs are registered; gather PEs accept a beat every
// cycle, so the outputs have no ready.
//
// Timing: a granted beat leaves on out_* one cycle after it is offered. With
// no two scatter PEs aiming at the same gather PE, all N_PE beats pass in the
// same cycle.
//
// From the paper: a routing network between the scatter and gather PEs
// (named in its kernel figure). Interleaving destinations by dst mod N_PE and
// round-robin arbitration are this design's choices.
module routing_network
  import hyscale_pkg::*;
#(
  parameter int N_PE = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [N_PE-1:0] in_valid,
  output logic [N_PE-1:0] in_ready,
  input  msg_t            in_msg [N_PE],
  output logic [N_PE-1:0] out_valid,
  output msg_t            out_msg [N_PE]
);

  logic [N_PE-1:0] req   [N_PE];   // req[output][input]
  logic [N_PE-1:0] grant [N_PE];

  function automatic int unsigned port_of(logic [VID_W-1:0] dst);
    return int'(dst % VID_W'(N_PE));
  endfunction

  always_comb begin
    for (int o = 0; o < N_PE; o++)
      for (int i = 0; i < N_PE; i++)
        req[o][i] = in_valid[i] && (port_of(in_msg[i].dst) == o);
  end

  for (genvar o = 0; o < N_PE; o++) begin : g_out
    rr_arbiter #(.N(N_PE)) u_arb (
      .clk, .rst_n, .req(req[o]), .grant(grant[o])
    );

    msg_t sel;
    always_comb begin
      sel = '0;
      for (int i = 0; i < N_PE; i++)
        if (grant[o][i]) sel = in_msg[i];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        out_valid[o] <= 1'b0;
        out_msg[o]   <= '0;
      end else begin
        out_valid[o] <= |grant[o];
        if (|grant[o]) out_msg[o] <= sel;
      end
    end
  end

  always_comb begin
    in_ready = '0;
    for (int o = 0; o < N_PE; o++) in_ready |= grant[o];
  end

endmodule
