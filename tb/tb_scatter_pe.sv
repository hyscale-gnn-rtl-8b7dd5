// tb_scatter_pe -- a scatter PE must scale its locally stored feature by the
// edge weight, tag each beat with the destination and its position (offset
// included), keep beat order under random back-pressure, reuse the stored
// feature for several edges without a new broadcast, and stream n beats in n
// cycles when never held.
module tb_scatter_pe;
  import hyscale_pkg::*;
  localparam int B_MAX = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic bc_valid, start, busy, done, out_valid, out_ready;
  logic [BEAT_W-1:0] bc_beat, nbeats, beat_offset;
  vec_t bc_data;
  logic [VID_W-1:0] dst;
  elem_t weight;
  msg_t out_msg;

  scatter_pe #(.B_MAX(B_MAX)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  vec_t feat [B_MAX];

  function automatic logic signed [31:0] ref_mul(input logic signed [31:0] a, input logic signed [31:0] w);
    longint p;
    p = longint'(a) * longint'(w);
    return 32'(p >>> 16);
  endfunction

  bit rand_ready;
  always @(negedge clk) out_ready = rand_ready ? ($urandom_range(0, 2) != 0) : 1'b1;

  task automatic run_edge(input int d, input int w, input int n, input int off, output int cycles);
    int got;
    @(negedge clk);
    start = 1; dst = VID_W'(d); weight = elem_t'(w); nbeats = BEAT_W'(n); beat_offset = BEAT_W'(off);
    @(negedge clk);
    start = 0;
    got = 0; cycles = 0;
    while (got < n) begin
      @(posedge clk);
      cycles++;
      if (out_valid && out_ready) begin
        check(out_msg.dst == VID_W'(d), "dst tag");
        check(out_msg.beat == BEAT_W'(off + got), $sformatf("beat %0d exp %0d", out_msg.beat, off + got));
        for (int i = 0; i < VEC; i++)
          check(out_msg.data[i] == ref_mul(feat[got][i], w), $sformatf("beat %0d elem %0d", got, i));
        got++;
      end
      if (cycles > 1000) break;
    end
    @(posedge clk);
    check(done === 1'b1, "done after last beat");
    @(negedge clk);
    check(!out_valid && !busy, "idle after edge");
  endtask

  initial begin
    int cyc;
    bc_valid = 0; bc_beat = '0; bc_data = '0; start = 0; dst = '0; weight = '0;
    nbeats = '0; beat_offset = '0; rand_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // broadcast a 6-beat feature
    for (int b = 0; b < 6; b++) begin
      @(negedge clk);
      for (int i = 0; i < VEC; i++) feat[b][i] = elem_t'($urandom_range(0, 32'h7fff_ffff)) - 32'sh4000_0000;
      bc_valid = 1; bc_beat = BEAT_W'(b); bc_data = feat[b];
    end
    @(negedge clk); bc_valid = 0;
    run_edge(5, 32'h0000_8000, 6, 0, cyc);            // weight 0.5
    check(cyc == 6, $sformatf("6 beats took %0d cycles", cyc));
    rand_ready = 1;
    run_edge(11, -32'sh0001_8000, 6, 6, cyc);          // weight -1.5, second half of row: reuse
    run_edge(2, 32'h0000_5a82, 4, 0, cyc);             // 1/sqrt(2), partial row
    rand_ready = 0;
    run_edge(3, 32'h0001_0000, 6, 0, cyc);             // weight 1.0
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
