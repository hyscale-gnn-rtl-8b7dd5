// tb_hyscale_kernel -- end-to-end test of the GNN propagation kernel at
// reduced sizes. Two complete two-layer forward propagations run back to
// back: a GraphSAGE-style model (concatenated self term, mean weights) and a
// GCN-style model (one slot, normalised weights, self loops). For each, the
// testbench generates a random sampled mini-batch, sorts every layer's edges
// by source, loads weights and biases, serves X' from a device-memory model
// with latency and random back-pressure, and compares every output element
// with a software forward pass. It also counts the mechanisms the design
// relies on and fails if one never happened: feature reuse (fewer fetches
// than edges), routing conflicts, device-memory back-pressure, on-chip
// layer-to-layer feature reads, ReLU clipping, output back-pressure,
// multi-tile accumulation in the update array.
module tb_hyscale_kernel;
  import hyscale_pkg::*;
  localparam int N_LAYERS = 2, N_PE = 4, ROWS = VEC, COLS = 32, F_MAX = 64, FOUT_MAX = 64, DST_MAX = 32;
  // model sizes
  localparam int F0 = 24, F1 = 64, F2 = 20;
  localparam int NV0 = 20, NV1 = 12, NV2 = 5;
  localparam int MAXE = 200;
  localparam int CYCLE_LIMIT = 200000;

  localparam int B0 = (F0 + VEC - 1) / VEC, B1 = (F1 + VEC - 1) / VEC;
  localparam int OT1 = (F1 + COLS - 1) / COLS, OT2 = (F2 + COLS - 1) / COLS;
  localparam int IN_ROWS_MAX = 2 * F_MAX, OTM = (FOUT_MAX + COLS - 1) / COLS, SUB = COLS / VEC;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wt_wr_en, bias_wr_en, start, busy, done, edge_valid, edge_ready;
  logic [31:0] wt_wr_addr, bias_wr_addr;
  elem_t wt_wr_data [COLS];
  elem_t bias_wr_data [COLS];
  logic [7:0] num_layers;
  layer_cfg_t cfg [N_LAYERS];
  edge_t edge_in;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid, out_valid, out_ready;
  logic [VID_W-1:0] mem_req_vid, out_vid;
  logic [BEAT_W-1:0] mem_req_beat, out_beat;
  vec_t mem_rsp_data, out_data;
  logic [31:0] stat_fetches, stat_edges, stat_conflicts, stat_cycles;

  hyscale_kernel #(.N_LAYERS(N_LAYERS), .N_PE(N_PE), .ROWS(ROWS), .COLS(COLS), .F_MAX(F_MAX),
                   .FOUT_MAX(FOUT_MAX), .DST_MAX(DST_MAX)) dut (.*);

  `include "tb_hyscale_body.svh"

endmodule
