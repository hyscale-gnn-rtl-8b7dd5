// tb_gather_pe -- the clear pass must zero exactly the requested rows and
// beats in rows*beats cycles; random beats (including back-to-back beats to
// the same place) must accumulate exactly; the read port must return the
// sums; a second, smaller clear must leave the rest untouched.
module tb_gather_pe;
  import hyscale_pkg::*;
  localparam int N_PE = 4, ROWS = 8, AB_MAX = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, clear_start, clear_busy;
  msg_t in_msg;
  logic [VID_W-1:0] clear_rows, rd_row;
  logic [BEAT_W-1:0] clear_beats, rd_beat;
  vec_t rd_data;

  gather_pe #(.N_PE(N_PE), .ROWS(ROWS), .AB_MAX(AB_MAX)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  elem_t ref_mem [ROWS][AB_MAX][VEC];

  task automatic do_clear(input int rows, input int beats);
    int cyc;
    @(negedge clk);
    clear_start = 1; clear_rows = VID_W'(rows); clear_beats = BEAT_W'(beats);
    @(negedge clk);
    clear_start = 0;
    cyc = 0;
    while (clear_busy) begin @(negedge clk); cyc++; end
    check(cyc == rows * beats, $sformatf("clear of %0dx%0d took %0d cycles", rows, beats, cyc));
    for (int r = 0; r < rows; r++) for (int b = 0; b < beats; b++) for (int i = 0; i < VEC; i++) ref_mem[r][b][i] = 0;
  endtask

  task automatic compare_all(input int rows, input int beats);
    for (int r = 0; r < rows; r++) for (int b = 0; b < beats; b++) begin
      @(negedge clk);
      rd_row = VID_W'(r); rd_beat = BEAT_W'(b);
      #1;
      for (int i = 0; i < VEC; i++)
        check(rd_data[i] == ref_mem[r][b][i], $sformatf("row %0d beat %0d elem %0d: %0d exp %0d", r, b, i, rd_data[i], ref_mem[r][b][i]));
    end
  endtask

  initial begin
    in_valid = 0; in_msg = '0; clear_start = 0; clear_rows = '0; clear_beats = '0; rd_row = '0; rd_beat = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    do_clear(ROWS, AB_MAX);
    compare_all(ROWS, AB_MAX);
    for (int k = 0; k < 400; k++) begin
      int r, b;
      @(negedge clk);
      r = (k % 5 == 1) ? r : $urandom_range(0, ROWS - 1);     // repeats for back-to-back hits
      b = (k % 5 == 1) ? b : $urandom_range(0, AB_MAX - 1);
      in_valid = ($urandom_range(0, 4) != 0);
      in_msg.dst  = VID_W'(r * N_PE + 1);                    // this PE owns dst mod 4 == 1
      in_msg.beat = BEAT_W'(b);
      for (int i = 0; i < VEC; i++) in_msg.data[i] = elem_t'($urandom_range(0, 2000)) - 1000;
      if (in_valid) for (int i = 0; i < VEC; i++) ref_mem[r][b][i] += in_msg.data[i];
    end
    @(negedge clk); in_valid = 0;
    compare_all(ROWS, AB_MAX);
    do_clear(3, 4);
    compare_all(ROWS, AB_MAX);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
