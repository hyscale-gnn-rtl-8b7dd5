// tb_systolic_array -- loads random weight tiles, streams random vertex
// slices one per cycle and compares every column sum with a software matrix
// product. The output of a vertex must appear exactly ROWS cycles after it
// entered, with its tag. The second tile's weights are loaded row by row
// straight after the first tile's last vertex, and its vertices start the
// cycle after row 0 is loaded, to check that tiles overlap without a drain.
module tb_systolic_array;
  import hyscale_pkg::*;
  localparam int ROWS = VEC, COLS = 8, TAG_W = 16, NV = 20;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic w_load_en, in_valid, out_valid;
  logic [$clog2(ROWS)-1:0] w_load_row;
  elem_t w_load_data [COLS];
  elem_t in_vec [ROWS];
  logic [TAG_W-1:0] in_tag, out_tag;
  elem_t out_psum [COLS];

  systolic_array #(.ROWS(ROWS), .COLS(COLS), .TAG_W(TAG_W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  elem_t W [2][ROWS][COLS];
  elem_t A [2][NV][ROWS];
  int entered [2*NV];
  int cycle = 0, outs = 0;

  function automatic elem_t ref_mul(input elem_t a, input elem_t w);
    longint p;
    p = longint'(a) * longint'(w);
    return elem_t'(p >>> 16);
  endfunction

  always @(posedge clk) cycle++;

  always @(negedge clk) if (rst_n && out_valid) begin
    int t, tile, v;
    t = int'(out_tag);
    tile = t / NV; v = t % NV;
    check(cycle - entered[t] == ROWS, $sformatf("vertex %0d latency %0d", t, cycle - entered[t]));
    for (int c = 0; c < COLS; c++) begin
      elem_t s;
      s = 0;
      for (int r = 0; r < ROWS; r++) s += ref_mul(A[tile][v][r], W[tile][r][c]);
      check(out_psum[c] == s, $sformatf("tile %0d vertex %0d col %0d: %0d exp %0d", tile, v, c, out_psum[c], s));
    end
    outs++;
  end

  initial begin
    w_load_en = 0; w_load_row = '0; in_valid = 0; in_tag = '0;
    for (int c = 0; c < COLS; c++) w_load_data[c] = '0;
    for (int r = 0; r < ROWS; r++) in_vec[r] = '0;
    for (int t = 0; t < 2; t++) begin
      for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) W[t][r][c] = elem_t'($urandom_range(0, 32'h3_0000)) - 32'sh1_8000;
      for (int v = 0; v < NV; v++) for (int r = 0; r < ROWS; r++) A[t][v][r] = elem_t'($urandom_range(0, 32'h20_0000)) - 32'sh10_0000;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2; t++) begin
      // cycle k: load row k (k < ROWS); vertex k-1 enters (1 <= k <= NV)
      for (int k = 0; k <= NV; k++) begin
        @(negedge clk);
        w_load_en = (k < ROWS);
        w_load_row = $clog2(ROWS)'(k);
        for (int c = 0; c < COLS; c++) w_load_data[c] = (k < ROWS) ? W[t][k][c] : '0;
        in_valid = (k >= 1);
        if (k >= 1) begin
          for (int r = 0; r < ROWS; r++) in_vec[r] = A[t][k-1][r];
          in_tag = TAG_W'(t * NV + k - 1);
          entered[t * NV + k - 1] = cycle;
        end
      end
    end
    @(negedge clk); in_valid = 0; w_load_en = 0;
    repeat (ROWS + 3) @(posedge clk);
    check(outs == 2 * NV, $sformatf("outputs %0d", outs));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
