// systolic_array -- weight-stationary MAC array of the update kernel.
//
// ROWS x COLS multiply-and-accumulate cells (ROWS*COLS = 2048 by default).
// Cell (r, c) holds weight W[r][c] of the current weight tile. A vertex's
// input slice a[0..ROWS-1] enters as one vector; element r is delayed r
// cycles by a triangular skew buffer and is then shared by all cells of row
// r. Partial sums move down the columns, one row per cycle, so column c
// produces  sum_r a[r] * W[r][c]  at the bottom ROWS cycles after the vector
// entered. A new vertex can enter every cycle.
//
// Weights are loaded one row per cycle (w_load_en, w_load_row). Loading rows
// 0, 1, ..., ROWS-1 on consecutive cycles, starting the cycle after the last
// vertex of a tile entered, replaces each row's weight just after that
// vertex has passed it. The first vertex of the new tile may enter the cycle
// after row 0 was loaded: it reaches row r one cycle after row r's new
// weight. Tiles therefore follow each other with a single bubble cycle.
//
// Interface: in_valid/in_vec/in_tag (tag carried along untouched),
// out_valid/out_psum/out_tag with a latency of ROWS cycles. No back-pressure.
//
// From the paper: an array of MAC units of total parallelism m, fed from a
// weight buffer and writing a result buffer. The weight-stationary dataflow,
// the skew and the row-wise sharing of the activation are this design's
// choices.
module systolic_array
  import hyscale_pkg::*;
#(
  parameter int ROWS  = 16,
  parameter int COLS  = 128,
  parameter int TAG_W = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    w_load_en,
  input  logic [$clog2(ROWS)-1:0] w_load_row,
  input  elem_t                   w_load_data [COLS],
  input  logic                    in_valid,
  input  elem_t                   in_vec [ROWS],
  input  logic [TAG_W-1:0]        in_tag,
  output logic                    out_valid,
  output elem_t                   out_psum [COLS],
  output logic [TAG_W-1:0]        out_tag
);

  // skew: a_sk[r] is in_vec[r] delayed by r cycles
  elem_t a_sk [ROWS];
  for (genvar r = 0; r < ROWS; r++) begin : g_skew
    if (r == 0) begin : g_direct
      assign a_sk[0] = in_vec[0];
    end else begin : g_delay
      elem_t dly [r];
      always_ff @(posedge clk) begin
        dly[0] <= in_vec[r];
        for (int k = 1; k < r; k++) dly[k] <= dly[k-1];
      end
      assign a_sk[r] = dly[r-1];
    end
  end

  elem_t psum [ROWS+1][COLS];
  for (genvar c = 0; c < COLS; c++) begin : g_top
    assign psum[0][c] = '0;
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      mac_unit u_mac (
        .clk,
        .w_load  (w_load_en && w_load_row == r),
        .w_in    (w_load_data[c]),
        .a_in    (a_sk[r]),
        .psum_in (psum[r][c]),
        .psum_out(psum[r+1][c])
      );
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_out
    assign out_psum[c] = psum[ROWS][c];
  end

  // valid and tag travel with the partial sums
  logic [ROWS-1:0]  v_pipe;
  logic [TAG_W-1:0] t_pipe [ROWS];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v_pipe <= '0;
    else        v_pipe <= {v_pipe[ROWS-2:0], in_valid};
  end
  always_ff @(posedge clk) begin
    t_pipe[0] <= in_tag;
    for (int k = 1; k < ROWS; k++) t_pipe[k] <= t_pipe[k-1];
  end
  assign out_valid = v_pipe[ROWS-1];
  assign out_tag   = t_pipe[ROWS-1];

endmodule
