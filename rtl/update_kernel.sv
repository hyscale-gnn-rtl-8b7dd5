// update_kernel -- feature update (one MLP layer) on a weight-stationary
// systolic array, with its weight, bias and result buffers.
//
// For every destination vertex v of the layer it computes
//     h_v = act( a_v * W + b ),   act = ReLU or identity,
// where a_v is the aggregated row read from the aggregate kernel's gather
// PEs. The weight matrix W (in_tiles*ROWS rows, out_tiles*COLS columns) is
// cut into ROWS x COLS tiles. For each output tile ot and input tile it, the
// tile is loaded into the array and all num_dst vertices stream through, one
// per cycle, each contributing the beat `it` of its aggregated row (ROWS
// equals the beat width VEC). The column sums leaving the array are added
// into the result buffer at (v, ot); the first input tile overwrites instead
// of adding, so the buffer needs no clearing. Weight rows of the next tile
// are loaded while the previous tile's last vertices are still inside the
// array, so one tile takes max(ROWS, num_dst + 1) cycles and a layer
//     out_tiles * in_tiles * max(ROWS, num_dst + 1) + ROWS + 1 cycles.
//
// Bias and activation are applied when the result buffer is read (res_rd_*,
// data the same cycle), by the next layer's feature duplicator or by the
// output stage, so the stored sums stay exact.
//
// Host ports: wt_wr_* writes one COLS-wide weight row at
//   address (layer * IN_ROWS_MAX + input row) * OUT_TILES_MAX + output tile;
// bias_wr_* writes COLS biases at layer * OUT_TILES_MAX + output tile.
//
// From the paper: a systolic-array update kernel with m = 2048 MACs next to a
// weight buffer and a result buffer, fed directly by the aggregate kernel and
// feeding the next layer's aggregation. Tiling, buffer organisation and the
// deferred bias/activation are this design's choices.
module update_kernel
  import hyscale_pkg::*;
#(
  parameter int N_LAYERS = 2,
  parameter int ROWS     = 16,     // array rows (= VEC)
  parameter int COLS     = 128,    // array columns; ROWS*COLS = m = 2048
  parameter int F_MAX    = 768,    // longest source feature (elements)
  parameter int FOUT_MAX = 256,    // longest output feature (elements)
  parameter int DST_MAX  = 32768   // destination vertices per layer
) (
  input  logic              clk,
  input  logic              rst_n,
  // host writes of weights and biases
  input  logic              wt_wr_en,
  input  logic [31:0]       wt_wr_addr,
  input  elem_t             wt_wr_data [COLS],
  input  logic              bias_wr_en,
  input  logic [31:0]       bias_wr_addr,
  input  elem_t             bias_wr_data [COLS],
  // layer control
  input  logic              start,
  input  logic [7:0]        layer,
  input  logic [BEAT_W-1:0] in_tiles,    // beats of the aggregated row
  input  logic [BEAT_W-1:0] out_tiles,
  input  logic [VID_W-1:0]  num_dst,
  input  logic              relu,
  output logic              busy,
  output logic              done,
  // aggregated rows (aggregate kernel read port)
  output logic [VID_W-1:0]  agg_rd_vid,
  output logic [BEAT_W-1:0] agg_rd_beat,
  input  vec_t              agg_rd_data,
  // results, with bias and activation of the last layer run
  input  logic [VID_W-1:0]  res_rd_vid,
  input  logic [BEAT_W-1:0] res_rd_beat,
  output vec_t              res_rd_data
);

  localparam int IN_ROWS_MAX   = 2 * F_MAX;                  // GraphSAGE concatenation
  localparam int OUT_TILES_MAX = (FOUT_MAX + COLS - 1) / COLS;
  localparam int WT_DEPTH      = N_LAYERS * IN_ROWS_MAX * OUT_TILES_MAX;
  localparam int B_DEPTH       = N_LAYERS * OUT_TILES_MAX;
  localparam int RES_DEPTH     = DST_MAX * OUT_TILES_MAX;
  localparam int SUB           = COLS / VEC;                 // beats per result row
  localparam int RW            = $clog2(ROWS);
  localparam int TAG_W         = 1 + BEAT_W + VID_W;

  if (ROWS != VEC) begin : g_bad_rows
    $error("update_kernel: ROWS must equal VEC");
  end
  if (COLS % VEC != 0) begin : g_bad_cols
    $error("update_kernel: COLS must be a multiple of VEC");
  end

  typedef elem_t [COLS-1:0] row_t;

  row_t wt_buf   [WT_DEPTH];
  row_t bias_buf [B_DEPTH];
  row_t res_buf  [RES_DEPTH];

  row_t wt_wr_row, bias_wr_row;
  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      wt_wr_row[c]   = wt_wr_data[c];
      bias_wr_row[c] = bias_wr_data[c];
    end
  end

  always_ff @(posedge clk) begin
    if (wt_wr_en)   wt_buf[wt_wr_addr[$clog2(WT_DEPTH)-1:0]]  <= wt_wr_row;
    if (bias_wr_en) bias_buf[bias_wr_addr[$clog2(B_DEPTH)-1:0]] <= bias_wr_row;
  end

  // ---------------- sequencer
  typedef enum logic [1:0] {IDLE, RUN, DRAIN} state_e;
  state_e state;

  logic [7:0]        lay_q, rd_layer;
  logic              rd_relu;
  logic [BEAT_W-1:0] it_n, ot_n, it, ot;
  logic [VID_W-1:0]  nd, k, tile_len;
  logic [RW:0]       drain;

  assign tile_len = (nd + 1 > VID_W'(ROWS)) ? nd + 1 : VID_W'(ROWS);
  assign busy     = (state != IDLE);

  logic        a_valid, w_en;
  logic [RW-1:0] w_row;
  row_t        w_row_data;
  elem_t       w_data [COLS];
  elem_t       a_vec [ROWS];
  logic [TAG_W-1:0] a_tag, o_tag;
  logic        o_valid;
  elem_t       o_psum [COLS];

  assign w_en       = (state == RUN) && (k < VID_W'(ROWS));
  assign w_row      = RW'(k);
  assign w_row_data = wt_buf[$clog2(WT_DEPTH)'(
                        (32'(lay_q) * IN_ROWS_MAX + 32'(it) * ROWS + 32'(w_row)) * OUT_TILES_MAX
                        + 32'(ot))];
  assign a_valid    = (state == RUN) && (k >= 1) && (k <= nd);
  assign agg_rd_vid  = k - 1'b1;
  assign agg_rd_beat = it;
  assign a_tag       = {it == '0, ot, agg_rd_vid};

  always_comb begin
    for (int c = 0; c < COLS; c++) w_data[c] = w_row_data[c];
    for (int r = 0; r < ROWS; r++) a_vec[r] = agg_rd_data[r];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= IDLE;
      lay_q    <= '0;
      rd_layer <= '0;
      rd_relu  <= 1'b0;
      it_n     <= '0;
      ot_n     <= '0;
      it       <= '0;
      ot       <= '0;
      nd       <= '0;
      k        <= '0;
      drain    <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          state    <= (in_tiles != '0 && out_tiles != '0 && num_dst != '0) ? RUN : DRAIN;
          lay_q    <= layer;
          rd_layer <= layer;
          rd_relu  <= relu;
          it_n     <= in_tiles;
          ot_n     <= out_tiles;
          nd       <= num_dst;
          it       <= '0;
          ot       <= '0;
          k        <= '0;
          drain    <= '0;
        end
        RUN: begin
          if (k == tile_len - 1'b1) begin
            k <= '0;
            if (it == it_n - 1'b1) begin
              it <= '0;
              if (ot == ot_n - 1'b1) state <= DRAIN;
              else ot <= ot + 1'b1;
            end else it <= it + 1'b1;
          end else k <= k + 1'b1;
        end
        DRAIN: begin
          if (drain == (RW+1)'(ROWS)) begin
            state <= IDLE;
            done  <= 1'b1;
          end else drain <= drain + 1'b1;
        end
        default: state <= IDLE;
      endcase
    end
  end

  systolic_array #(.ROWS(ROWS), .COLS(COLS), .TAG_W(TAG_W)) u_array (
    .clk, .rst_n,
    .w_load_en(w_en), .w_load_row(w_row), .w_load_data(w_data),
    .in_valid(a_valid), .in_vec(a_vec), .in_tag(a_tag),
    .out_valid(o_valid), .out_psum(o_psum), .out_tag(o_tag)
  );

  // ---------------- result buffer: accumulate over input tiles
  logic              o_first;
  logic [BEAT_W-1:0] o_ot;
  logic [VID_W-1:0]  o_vid;
  logic [$clog2(RES_DEPTH)-1:0] o_addr;
  assign {o_first, o_ot, o_vid} = o_tag;
  assign o_addr = $clog2(RES_DEPTH)'(32'(o_vid) * OUT_TILES_MAX + 32'(o_ot));

  always_ff @(posedge clk) begin
    if (o_valid) begin
      for (int c = 0; c < COLS; c++)
        res_buf[o_addr][c] <= o_first ? o_psum[c] : res_buf[o_addr][c] + o_psum[c];
    end
  end

  // ---------------- result read with bias and activation
  logic [BEAT_W-1:0] r_ot, r_sub;
  row_t              r_row, r_bias;
  assign r_ot   = res_rd_beat / BEAT_W'(SUB);
  assign r_sub  = res_rd_beat % BEAT_W'(SUB);
  assign r_row  = res_buf[$clog2(RES_DEPTH)'(32'(res_rd_vid) * OUT_TILES_MAX + 32'(r_ot))];
  assign r_bias = bias_buf[$clog2(B_DEPTH)'(32'(rd_layer) * OUT_TILES_MAX + 32'(r_ot))];

  always_comb begin
    for (int i = 0; i < VEC; i++) begin
      elem_t x;
      x = r_row[32'(r_sub) * VEC + i] + r_bias[32'(r_sub) * VEC + i];
      res_rd_data[i] = (rd_relu && x < 0) ? '0 : x;
    end
  end

  a_layer_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    start && state == IDLE |-> (32'(layer) < N_LAYERS && 32'(out_tiles) <= OUT_TILES_MAX &&
                                32'(in_tiles) * ROWS <= IN_ROWS_MAX && 32'(num_dst) <= DST_MAX));

endmodule
