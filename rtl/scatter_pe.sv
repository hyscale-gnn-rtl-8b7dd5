// scatter_pe -- scatter processing element of the aggregate kernel.
//
// Each scatter PE keeps a local copy of the feature of the source vertex it
// is currently working on, written beat by beat from the feature
// duplicator's broadcast. An edge (src -> dst, weight) assigned to the PE is
// then processed by reading the local copy back one beat per cycle,
// multiplying every element by the edge weight and sending the scaled beat,
// tagged with `dst` and its beat position, to the routing network. Because
// the copy stays in the PE, consecutive edges that leave the same source
// vertex reuse it without another memory read.
//
// Interface: bc_* writes the local copy. `start` (while idle) takes an edge:
// dst, weight, the number of beats and the offset of the first beat in the
// destination row (non-zero for the self half of a GraphSAGE row). Output
// is a valid/ready stream of msg_t. `done` pulses the cycle after the last
// beat is accepted.
// Timing: one beat per cycle while out_ready is high; the first beat is
// offered the cycle after `start`.
//
// From the paper: the local feature copy, its reuse D_out(v) times, one
// edge per PE at a time. The per-edge weight multiply (how GCN's
// normalisation and GraphSAGE's mean are applied) is this design's choice.
module scatter_pe
  import hyscale_pkg::*;
#(
  parameter int B_MAX = 48   // beats of the longest source feature
) (
  input  logic              clk,
  input  logic              rst_n,
  // broadcast from the feature duplicator
  input  logic              bc_valid,
  input  logic [BEAT_W-1:0] bc_beat,
  input  vec_t              bc_data,
  // edge assignment
  input  logic              start,
  input  logic [VID_W-1:0]  dst,
  input  elem_t             weight,
  input  logic [BEAT_W-1:0] nbeats,
  input  logic [BEAT_W-1:0] beat_offset,
  output logic              busy,
  output logic              done,
  // to the routing network
  output logic              out_valid,
  input  logic              out_ready,
  output msg_t              out_msg
);

  vec_t              local_feat [B_MAX];
  logic              active;
  logic [VID_W-1:0]  cur_dst;
  elem_t             cur_w;
  logic [BEAT_W-1:0] cur_n, cur_off, b;

  always_ff @(posedge clk) begin
    if (bc_valid) local_feat[bc_beat] <= bc_data;
  end

  assign busy      = active;
  assign out_valid = active;
  always_comb begin
    out_msg.dst  = cur_dst;
    out_msg.beat = cur_off + b;
    out_msg.data = vec_scale(local_feat[b], cur_w);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active  <= 1'b0;
      done    <= 1'b0;
      cur_dst <= '0;
      cur_w   <= '0;
      cur_n   <= '0;
      cur_off <= '0;
      b       <= '0;
    end else begin
      done <= 1'b0;
      if (!active) begin
        if (start && nbeats != '0) begin
          active  <= 1'b1;
          cur_dst <= dst;
          cur_w   <= weight;
          cur_n   <= nbeats;
          cur_off <= beat_offset;
          b       <= '0;
        end
      end else if (out_ready) begin
        if (b == cur_n - 1'b1) begin
          active <= 1'b0;
          done   <= 1'b1;
        end
        b <= b + 1'b1;
      end
    end
  end

endmodule
