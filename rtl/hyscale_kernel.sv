// hyscale_kernel -- GNN propagation kernel of the accelerator trainer.
//
// Runs the forward propagation of an L-layer GNN (GCN or GraphSAGE) over one
// sampled mini-batch. Per layer l the aggregate kernel sums weighted source
// features into per-destination rows held on chip, then the update kernel
// multiplies those rows by W^l on a 2048-MAC systolic array. Layer 1 reads
// its source features (the mini-batch feature matrix X') from device memory;
// every later layer reads them straight from the update kernel's result
// buffer, with bias and ReLU applied on the way. Only the last layer's output
// leaves the kernel, on the out_* stream. Aggregation and update of a layer
// run one after the other.
//
// Host interface:
//   wt_wr_*, bias_wr_*   load W^l and b^l before `start` (see update_kernel)
//   cfg[l], num_layers   per-layer sizes; layer l+1's in_beats must equal
//                        layer l's out_tiles * COLS / VEC
//   edge_*               edges of layer 1, then layer 2, ..., each layer
//                        sorted by source vertex and closed by `last`.
//                        Layer 1 sources are rows of X'; later sources are
//                        destination indices of the previous layer.
//   mem_*                read port into device memory holding X'
//   out_*                valid/ready stream of the final embeddings, vertex
//                        by vertex, out_tiles*COLS/VEC beats per vertex
//   stat_*               feature fetches, edges and routing conflicts summed
//                        over the layers, and the cycles of the operation
//                        (the execution time the runtime reads back)
// `done` pulses after the last output beat is accepted.
//
// From the paper: the aggregate -> update -> aggregate -> update datapath
// with no intermediate result written to memory, sorted edges, n = 8 scatter
// and gather PEs, m = 2048 MACs. Fixed-point arithmetic, the host ports, the
// serial order of aggregation and update and the output stream are this
// design's choices. Backward propagation and gradient output are not built.
module hyscale_kernel
  import hyscale_pkg::*;
#(
  parameter int N_LAYERS = 2,
  parameter int N_PE     = 8,       // n: scatter-gather PEs
  parameter int ROWS     = 16,      // update array rows (= VEC)
  parameter int COLS     = 128,     // update array columns, m = ROWS*COLS = 2048
  parameter int F_MAX    = 768,     // longest input feature
  parameter int FOUT_MAX = 256,     // longest layer output
  parameter int DST_MAX  = 32768    // destination vertices per layer
) (
  input  logic              clk,
  input  logic              rst_n,
  // host writes
  input  logic              wt_wr_en,
  input  logic [31:0]       wt_wr_addr,
  input  elem_t             wt_wr_data [COLS],
  input  logic              bias_wr_en,
  input  logic [31:0]       bias_wr_addr,
  input  elem_t             bias_wr_data [COLS],
  // operation
  input  logic              start,
  input  logic [7:0]        num_layers,
  input  layer_cfg_t        cfg [N_LAYERS],
  output logic              busy,
  output logic              done,
  // sorted edge stream
  input  logic              edge_valid,
  output logic              edge_ready,
  input  edge_t             edge_in,
  // device memory (mini-batch features X')
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic [VID_W-1:0]  mem_req_vid,
  output logic [BEAT_W-1:0] mem_req_beat,
  input  logic              mem_rsp_valid,
  input  vec_t              mem_rsp_data,
  // final embeddings
  output logic              out_valid,
  input  logic              out_ready,
  output logic [VID_W-1:0]  out_vid,
  output logic [BEAT_W-1:0] out_beat,
  output vec_t              out_data,
  // statistics
  output logic [31:0]       stat_fetches,
  output logic [31:0]       stat_edges,
  output logic [31:0]       stat_conflicts,
  output logic [31:0]       stat_cycles
);

  localparam int B_MAX = (F_MAX + VEC - 1) / VEC;
  localparam int SUB   = COLS / VEC;

  typedef enum logic [2:0] {IDLE, AGG_GO, AGG, UPD_GO, UPD, OUT} state_e;
  state_e state;

  logic [7:0]        lay, n_lay;
  layer_cfg_t        cur;
  logic              agg_start, agg_busy, agg_done;
  logic              upd_start, upd_busy, upd_done;
  logic [31:0]       a_fetches, a_edges, a_conflicts;

  logic [VID_W-1:0]  agg_rd_vid;
  logic [BEAT_W-1:0] agg_rd_beat;
  vec_t              agg_rd_data;
  logic              dup_rd_en;
  logic [VID_W-1:0]  dup_rd_vid, res_rd_vid;
  logic [BEAT_W-1:0] dup_rd_beat, res_rd_beat;
  vec_t              res_rd_data;

  logic [VID_W-1:0]  o_v;
  logic [BEAT_W-1:0] o_b, o_beats;

  assign cur       = cfg[lay[$clog2(N_LAYERS > 1 ? N_LAYERS : 2)-1:0]];
  assign agg_start = (state == AGG_GO);
  assign upd_start = (state == UPD_GO);
  assign busy      = (state != IDLE);
  assign o_beats   = BEAT_W'(32'(cur.out_tiles) * SUB);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= IDLE;
      lay            <= '0;
      n_lay          <= '0;
      o_v            <= '0;
      o_b            <= '0;
      done           <= 1'b0;
      stat_fetches   <= '0;
      stat_edges     <= '0;
      stat_conflicts <= '0;
      stat_cycles    <= '0;
    end else begin
      done <= 1'b0;
      if (state != IDLE) stat_cycles <= stat_cycles + 1;
      unique case (state)
        IDLE: if (start && num_layers != '0) begin
          state          <= AGG_GO;
          lay            <= '0;
          n_lay          <= num_layers;
          stat_fetches   <= '0;
          stat_edges     <= '0;
          stat_conflicts <= '0;
          stat_cycles    <= '0;
        end
        AGG_GO: state <= AGG;
        AGG: if (agg_done) begin
          state          <= UPD_GO;
          stat_fetches   <= stat_fetches + a_fetches;
          stat_edges     <= stat_edges + a_edges;
          stat_conflicts <= stat_conflicts + a_conflicts;
        end
        UPD_GO: state <= UPD;
        UPD: if (upd_done) begin
          if (lay + 1'b1 < n_lay) begin
            lay   <= lay + 1'b1;
            state <= AGG_GO;
          end else begin
            state <= OUT;
            o_v   <= '0;
            o_b   <= '0;
          end
        end
        OUT: if (out_ready) begin
          if (o_b == o_beats - 1'b1) begin
            o_b <= '0;
            if (o_v == cur.num_dst - 1'b1) begin
              state <= IDLE;
              done  <= 1'b1;
            end else o_v <= o_v + 1'b1;
          end else o_b <= o_b + 1'b1;
        end
        default: state <= IDLE;
      endcase
    end
  end

  aggregate_kernel #(.N_PE(N_PE), .B_MAX(B_MAX), .DST_MAX(DST_MAX)) u_agg (
    .clk, .rst_n,
    .start(agg_start), .in_beats(cur.in_beats), .concat(cur.concat), .num_dst(cur.num_dst),
    .from_onchip(lay != '0), .busy(agg_busy), .done(agg_done),
    .edge_valid, .edge_ready, .edge_in,
    .mem_req_valid, .mem_req_ready, .mem_req_vid, .mem_req_beat, .mem_rsp_valid, .mem_rsp_data,
    .onchip_rd_en(dup_rd_en), .onchip_rd_vid(dup_rd_vid), .onchip_rd_beat(dup_rd_beat),
    .onchip_rd_data(res_rd_data),
    .rd_vid(agg_rd_vid), .rd_beat(agg_rd_beat), .rd_data(agg_rd_data),
    .stat_fetches(a_fetches), .stat_edges(a_edges), .stat_conflicts(a_conflicts)
  );

  update_kernel #(.N_LAYERS(N_LAYERS), .ROWS(ROWS), .COLS(COLS), .F_MAX(F_MAX),
                  .FOUT_MAX(FOUT_MAX), .DST_MAX(DST_MAX)) u_upd (
    .clk, .rst_n,
    .wt_wr_en, .wt_wr_addr, .wt_wr_data, .bias_wr_en, .bias_wr_addr, .bias_wr_data,
    .start(upd_start), .layer(lay),
    .in_tiles(cur.concat ? BEAT_W'(cur.in_beats << 1) : cur.in_beats),
    .out_tiles(cur.out_tiles), .num_dst(cur.num_dst), .relu(cur.relu),
    .busy(upd_busy), .done(upd_done),
    .agg_rd_vid, .agg_rd_beat, .agg_rd_data,
    .res_rd_vid, .res_rd_beat, .res_rd_data
  );

  // the result buffer is read by the next layer's duplicator or by the output
  assign res_rd_vid  = (state == OUT) ? o_v : dup_rd_vid;
  assign res_rd_beat = (state == OUT) ? o_b : dup_rd_beat;

  assign out_valid = (state == OUT);
  assign out_vid   = o_v;
  assign out_beat  = o_b;
  assign out_data  = res_rd_data;

  a_chained_width: assert property (@(posedge clk) disable iff (!rst_n)
    (state == AGG_GO && lay != '0) |-> 32'(cur.in_beats) == 32'(cfg[lay - 1'b1].out_tiles) * SUB);
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n) !(agg_busy && upd_busy));
  a_onchip_only_after_first: assert property (@(posedge clk) disable iff (!rst_n)
    dup_rd_en |-> lay != '0);

endmodule
