// aggregate_kernel -- scatter-gather feature aggregation of one GNN layer.
//
// Computes, for every destination vertex v of the layer,
//     a_v[slot 0] = sum over edges (u -> v, slot 0) of  w_uv * h_u
//     a_v[slot 1] = sum over edges (u -> v, slot 1) of  w_uv * h_u
// which covers GCN (one slot, w = 1/sqrt(D(u)D(v)), self loop included) and
// GraphSAGE (slot 0 = mean of the neighbours with w = 1/|N(v)|, slot 1 = the
// vertex's own feature with w = 1, giving the concatenation h_v || mean).
//
// Structure: a feature duplicator, N_PE scatter PEs, a routing network and
// N_PE gather PEs with their intermediate-result buffers. Edges arrive sorted
// by source vertex. The dispatcher keeps the feature of the current source
// in every scatter PE and hands each edge of that source to the first idle
// scatter PE, one edge per cycle. When an edge with a new source arrives, it
// waits until every scatter PE has finished, then has the duplicator fetch
// and broadcast the new feature; scatter PEs without work stay idle
// meanwhile. Each source feature is therefore read once per layer when the
// edges are sorted, whatever its out-degree.
//
// Sequence after `start`: clear the rows the layer will use in every gather
// PE, run the edge stream up to the edge marked `last`, wait for the scatter
// PEs and the routing network to drain, pulse `done`. The update kernel
// then reads aggregated rows through rd_vid/rd_beat (data the same cycle).
//
// Statistics for the host: number of feature fetches, number of edges, and
// number of cycles some scatter PE was held by a routing conflict.
//
// From the paper: the block structure, the sorted edges, the broadcast and
// reuse of one fetched feature, the idle PE while the next feature is read.
// The dispatch policy, the clear pass and the statistics are this design's.
module aggregate_kernel
  import hyscale_pkg::*;
#(
  parameter int N_PE    = 8,
  parameter int B_MAX   = 48,     // beats of the longest source feature
  parameter int DST_MAX = 32768   // destination vertices per layer
) (
  input  logic              clk,
  input  logic              rst_n,
  // layer control
  input  logic              start,
  input  logic [BEAT_W-1:0] in_beats,
  input  logic              concat,
  input  logic [VID_W-1:0]  num_dst,
  input  logic              from_onchip,
  output logic              busy,
  output logic              done,
  // sorted edge stream
  input  logic              edge_valid,
  output logic              edge_ready,
  input  edge_t             edge_in,
  // device memory read port (first layer)
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic [VID_W-1:0]  mem_req_vid,
  output logic [BEAT_W-1:0] mem_req_beat,
  input  logic              mem_rsp_valid,
  input  vec_t              mem_rsp_data,
  // on-chip read port into the previous layer's results (later layers)
  output logic              onchip_rd_en,
  output logic [VID_W-1:0]  onchip_rd_vid,
  output logic [BEAT_W-1:0] onchip_rd_beat,
  input  vec_t              onchip_rd_data,
  // aggregated rows, read by the update kernel
  input  logic [VID_W-1:0]  rd_vid,
  input  logic [BEAT_W-1:0] rd_beat,
  output vec_t              rd_data,
  // statistics of the last layer run
  output logic [31:0]       stat_fetches,
  output logic [31:0]       stat_edges,
  output logic [31:0]       stat_conflicts
);

  localparam int ROWS_PE = (DST_MAX + N_PE - 1) / N_PE;
  localparam int PW      = (N_PE > 1) ? $clog2(N_PE) : 1;

  typedef enum logic [2:0] {IDLE, CLEAR, RUN, FETCH, DRAIN} state_e;
  state_e state;

  // ---------------- feature duplicator
  logic              dup_start, dup_busy, dup_done;
  logic [N_PE-1:0]   bc_valid;
  logic [BEAT_W-1:0] bc_beat [N_PE];
  vec_t              bc_data [N_PE];

  // ---------------- dispatcher state
  edge_t             head;
  logic              have_head;
  logic [VID_W-1:0]  loaded_src;
  logic              loaded;
  logic              seen_last;
  logic [1:0]        drain_cnt;
  logic [BEAT_W-1:0] beats_q;
  logic              onchip_q;

  logic [N_PE-1:0]   spe_busy, spe_start, spe_done;
  logic [N_PE-1:0]   spe_valid, spe_ready;
  msg_t              spe_msg [N_PE];
  logic [N_PE-1:0]   rn_valid;
  msg_t              rn_msg [N_PE];
  logic [N_PE-1:0]   gpe_clear_busy;
  vec_t              gpe_rd_data [N_PE];
  logic              clear_go;

  logic              all_idle, any_idle, can_assign;
  logic [PW-1:0]     free_pe;

  always_comb begin
    any_idle = 1'b0;
    free_pe  = '0;
    for (int p = N_PE - 1; p >= 0; p--)
      if (!spe_busy[p]) begin
        any_idle = 1'b1;
        free_pe  = PW'(p);
      end
  end
  assign all_idle = (spe_busy == '0);

  assign can_assign = (state == RUN) && have_head && loaded &&
                      (head.src == loaded_src) && any_idle;

  always_comb begin
    spe_start = '0;
    if (can_assign) spe_start[free_pe] = 1'b1;
  end

  assign edge_ready = (state == RUN) && !have_head && !seen_last;
  assign dup_start  = (state == RUN) && have_head && !(loaded && head.src == loaded_src) &&
                      all_idle;
  assign clear_go   = (state == IDLE) && start;
  assign busy       = (state != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= IDLE;
      head           <= '0;
      have_head      <= 1'b0;
      loaded_src     <= '0;
      loaded         <= 1'b0;
      seen_last      <= 1'b0;
      drain_cnt      <= '0;
      beats_q        <= '0;
      onchip_q       <= 1'b0;
      done           <= 1'b0;
      stat_fetches   <= '0;
      stat_edges     <= '0;
      stat_conflicts <= '0;
    end else begin
      done <= 1'b0;
      if (state != IDLE && |(spe_valid & ~spe_ready)) stat_conflicts <= stat_conflicts + 1;
      unique case (state)
        IDLE: if (start) begin
          state          <= CLEAR;
          beats_q        <= in_beats;
          onchip_q       <= from_onchip;
          have_head      <= 1'b0;
          loaded         <= 1'b0;
          seen_last      <= 1'b0;
          stat_fetches   <= '0;
          stat_edges     <= '0;
          stat_conflicts <= '0;
        end
        // the gather PEs raise clear_busy the cycle after clear_go
        CLEAR: if (gpe_clear_busy == '0) state <= RUN;
        RUN: begin
          if (edge_valid && edge_ready) begin
            head      <= edge_in;
            have_head <= 1'b1;
            seen_last <= edge_in.last;
            stat_edges <= stat_edges + 1;
          end
          if (can_assign) begin
            have_head <= 1'b0;
            if (head.last) begin
              state     <= DRAIN;
              drain_cnt <= '0;
            end
          end
          if (dup_start) begin
            state        <= FETCH;
            loaded       <= 1'b0;
            stat_fetches <= stat_fetches + 1;
          end
        end
        FETCH: if (dup_done) begin
          state      <= RUN;
          loaded     <= 1'b1;
          loaded_src <= head.src;
        end
        DRAIN: begin
          // wait for the scatter PEs, then two cycles for the routing
          // register and the gather PE write
          if (!all_idle) drain_cnt <= '0;
          else if (drain_cnt == 2'd2) begin
            state <= IDLE;
            done  <= 1'b1;
          end else drain_cnt <= drain_cnt + 1'b1;
        end
        default: state <= IDLE;
      endcase
    end
  end

  feature_duplicator #(.N_PE(N_PE)) u_dup (
    .clk, .rst_n,
    .start(dup_start), .src_vid(head.src), .nbeats(beats_q), .from_onchip(onchip_q),
    .busy(dup_busy), .done(dup_done),
    .mem_req_valid, .mem_req_ready, .mem_req_vid, .mem_req_beat,
    .mem_rsp_valid, .mem_rsp_data,
    .onchip_rd_en, .onchip_rd_vid, .onchip_rd_beat, .onchip_rd_data,
    .bc_valid, .bc_beat, .bc_data
  );

  for (genvar p = 0; p < N_PE; p++) begin : g_spe
    scatter_pe #(.B_MAX(B_MAX)) u_spe (
      .clk, .rst_n,
      .bc_valid(bc_valid[p]), .bc_beat(bc_beat[p]), .bc_data(bc_data[p]),
      .start(spe_start[p]), .dst(head.dst), .weight(head.weight), .nbeats(beats_q),
      .beat_offset(head.slot ? beats_q : '0),
      .busy(spe_busy[p]), .done(spe_done[p]),
      .out_valid(spe_valid[p]), .out_ready(spe_ready[p]), .out_msg(spe_msg[p])
    );
  end

  routing_network #(.N_PE(N_PE)) u_rn (
    .clk, .rst_n,
    .in_valid(spe_valid), .in_ready(spe_ready), .in_msg(spe_msg),
    .out_valid(rn_valid), .out_msg(rn_msg)
  );

  for (genvar p = 0; p < N_PE; p++) begin : g_gpe
    gather_pe #(.N_PE(N_PE), .ROWS(ROWS_PE), .AB_MAX(2 * B_MAX)) u_gpe (
      .clk, .rst_n,
      .in_valid(rn_valid[p]), .in_msg(rn_msg[p]),
      .clear_start(clear_go),
      .clear_rows((num_dst + VID_W'(N_PE - 1)) / VID_W'(N_PE)),
      .clear_beats(concat ? BEAT_W'(in_beats << 1) : in_beats),
      .clear_busy(gpe_clear_busy[p]),
      .rd_row(rd_vid / VID_W'(N_PE)), .rd_beat(rd_beat), .rd_data(gpe_rd_data[p])
    );
  end

  assign rd_data = gpe_rd_data[rd_vid % VID_W'(N_PE)];

  a_assign_needs_feature: assert property (@(posedge clk) disable iff (!rst_n)
    |spe_start |-> (loaded && state == RUN));
  a_one_fetch_at_a_time: assert property (@(posedge clk) disable iff (!rst_n)
    dup_start |-> !dup_busy);

endmodule
