// tb_update_kernel -- loads two layers of random weights and biases, runs a
// layer with several input and output tiles and ReLU (fewer vertices than
// array rows) and a layer without ReLU (more vertices than rows), and checks
// every activated output against a software a*W+b, plus the cycle count
// out_tiles * in_tiles * max(ROWS, num_dst+1) + ROWS + 1 from start to done.
module tb_update_kernel;
  import hyscale_pkg::*;
  localparam int N_LAYERS = 2, ROWS = VEC, COLS = 32, F_MAX = 32, FOUT_MAX = 64, DST_MAX = 24;
  localparam int IN_ROWS_MAX = 2 * F_MAX, OTM = FOUT_MAX / COLS, SUB = COLS / VEC;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wt_wr_en, bias_wr_en, start, relu, busy, done;
  logic [31:0] wt_wr_addr, bias_wr_addr;
  elem_t wt_wr_data [COLS];
  elem_t bias_wr_data [COLS];
  logic [7:0] layer;
  logic [BEAT_W-1:0] in_tiles, out_tiles, agg_rd_beat, res_rd_beat;
  logic [VID_W-1:0] num_dst, agg_rd_vid, res_rd_vid;
  vec_t agg_rd_data, res_rd_data;

  update_kernel #(.N_LAYERS(N_LAYERS), .ROWS(ROWS), .COLS(COLS), .F_MAX(F_MAX),
                  .FOUT_MAX(FOUT_MAX), .DST_MAX(DST_MAX)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  elem_t W [N_LAYERS][IN_ROWS_MAX][FOUT_MAX];
  elem_t B [N_LAYERS][FOUT_MAX];
  elem_t A [DST_MAX][IN_ROWS_MAX];

  always_comb for (int i = 0; i < VEC; i++)
    agg_rd_data[i] = (int'(agg_rd_vid) < DST_MAX && int'(agg_rd_beat) * VEC + i < IN_ROWS_MAX)
                     ? A[agg_rd_vid][int'(agg_rd_beat) * VEC + i] : 32'sd12345;

  function automatic elem_t ref_mul(input elem_t a, input elem_t w);
    longint p;
    p = longint'(a) * longint'(w);
    return elem_t'(p >>> 16);
  endfunction

  task automatic run_layer(input int l, input int it, input int ot, input int nd, input bit act);
    int cyc, exp_cyc;
    for (int v = 0; v < DST_MAX; v++) for (int r = 0; r < IN_ROWS_MAX; r++) A[v][r] = elem_t'($urandom_range(0, 32'h8_0000)) - 32'sh4_0000;
    @(negedge clk);
    start = 1; layer = 8'(l); in_tiles = BEAT_W'(it); out_tiles = BEAT_W'(ot); num_dst = VID_W'(nd); relu = act;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; if (cyc > 100000) break; end
    exp_cyc = ot * it * ((nd + 1 > ROWS) ? nd + 1 : ROWS) + ROWS + 2;
    check(cyc == exp_cyc, $sformatf("layer %0d took %0d cycles, expected %0d", l, cyc, exp_cyc));
    for (int v = 0; v < nd; v++) for (int b = 0; b < ot * SUB; b++) begin
      res_rd_vid = VID_W'(v); res_rd_beat = BEAT_W'(b);
      #1;
      for (int i = 0; i < VEC; i++) begin
        elem_t s;
        int col;
        col = b * VEC + i;
        s = B[l][col];
        for (int r = 0; r < it * ROWS; r++) s += ref_mul(A[v][r], W[l][r][col]);
        if (act && s < 0) s = 0;
        check(res_rd_data[i] == s, $sformatf("layer %0d v %0d col %0d: %0d exp %0d", l, v, col, res_rd_data[i], s));
      end
    end
  endtask

  int negs;
  initial begin
    wt_wr_en = 0; bias_wr_en = 0; wt_wr_addr = '0; bias_wr_addr = '0; start = 0; layer = '0;
    in_tiles = '0; out_tiles = '0; num_dst = '0; relu = 0; res_rd_vid = '0; res_rd_beat = '0;
    for (int c = 0; c < COLS; c++) begin wt_wr_data[c] = '0; bias_wr_data[c] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < N_LAYERS; l++) begin
      for (int r = 0; r < IN_ROWS_MAX; r++) for (int c = 0; c < FOUT_MAX; c++) W[l][r][c] = elem_t'($urandom_range(0, 32'h2_0000)) - 32'sh1_0000;
      for (int c = 0; c < FOUT_MAX; c++) B[l][c] = elem_t'($urandom_range(0, 32'h4_0000)) - 32'sh2_0000;
      for (int r = 0; r < IN_ROWS_MAX; r++) for (int t = 0; t < OTM; t++) begin
        @(negedge clk);
        wt_wr_en = 1; wt_wr_addr = 32'((l * IN_ROWS_MAX + r) * OTM + t);
        for (int c = 0; c < COLS; c++) wt_wr_data[c] = W[l][r][t * COLS + c];
      end
      for (int t = 0; t < OTM; t++) begin
        @(negedge clk);
        wt_wr_en = 0; bias_wr_en = 1; bias_wr_addr = 32'(l * OTM + t);
        for (int c = 0; c < COLS; c++) bias_wr_data[c] = B[l][t * COLS + c];
      end
      @(negedge clk); wt_wr_en = 0; bias_wr_en = 0;
    end
    run_layer(0, 3, 2, 5, 1);
    run_layer(1, 4, 1, 20, 0);
    // the identity layer must have produced negative outputs
    negs = 0;
    for (int b = 0; b < SUB; b++) begin
      res_rd_vid = '0; res_rd_beat = BEAT_W'(b); #1;
      for (int i = 0; i < VEC; i++) if (res_rd_data[i] < 0) negs++;
    end
    check(negs > 0, "identity activation keeps negative values");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
