// tb_feature_duplicator -- checks fetch and broadcast of the feature
// duplicator: beats from a device-memory model with latency and random
// back-pressure, and beats from a combinational on-chip port, must reach
// every scatter-PE copy in order with the right data; `done` must pulse
// once per fetch, and an on-chip fetch of n beats must finish n+1 cycles
// after `start`.
module tb_feature_duplicator;
  import hyscale_pkg::*;
  localparam int N_PE = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, from_onchip, busy, done;
  logic [VID_W-1:0] src_vid;
  logic [BEAT_W-1:0] nbeats;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic [VID_W-1:0] mem_req_vid;
  logic [BEAT_W-1:0] mem_req_beat;
  vec_t mem_rsp_data, onchip_rd_data;
  logic onchip_rd_en;
  logic [VID_W-1:0] onchip_rd_vid;
  logic [BEAT_W-1:0] onchip_rd_beat;
  logic [N_PE-1:0] bc_valid;
  logic [BEAT_W-1:0] bc_beat [N_PE];
  vec_t bc_data [N_PE];

  feature_duplicator #(.N_PE(N_PE)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic vec_t pattern(input logic [VID_W-1:0] v, input logic [BEAT_W-1:0] b, input bit onchip);
    vec_t r;
    for (int i = 0; i < VEC; i++) r[i] = elem_t'(v * 1000 + b * 16 + i + (onchip ? 77 : 0));
    return r;
  endfunction

  // device memory model: 3-cycle latency, random ready
  logic [VID_W+BEAT_W-1:0] pipe [3];
  logic pv [3];
  always_ff @(posedge clk) begin
    mem_req_ready <= ($urandom_range(0, 3) != 0);
    pv[0] <= mem_req_valid && mem_req_ready;
    pipe[0] <= {mem_req_vid, mem_req_beat};
    for (int k = 1; k < 3; k++) begin pv[k] <= pv[k-1]; pipe[k] <= pipe[k-1]; end
  end
  assign mem_rsp_valid = pv[2];
  assign mem_rsp_data  = pattern(pipe[2][VID_W+BEAT_W-1:BEAT_W], pipe[2][BEAT_W-1:0], 0);
  assign onchip_rd_data = pattern(onchip_rd_vid, onchip_rd_beat, 1);

  // monitor
  int exp_beat [N_PE];
  logic [VID_W-1:0] cur_vid;
  bit cur_onchip;
  int dones = 0;
  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < N_PE; p++) if (bc_valid[p]) begin
      check(bc_beat[p] == BEAT_W'(exp_beat[p]), $sformatf("pe %0d beat %0d exp %0d", p, bc_beat[p], exp_beat[p]));
      check(bc_data[p] == pattern(cur_vid, bc_beat[p], cur_onchip), $sformatf("pe %0d data beat %0d", p, bc_beat[p]));
      exp_beat[p]++;
    end
    if (done) dones++;
  end

  task automatic fetch(input int vid, input int n, input bit onchip, output int cycles);
    for (int p = 0; p < N_PE; p++) exp_beat[p] = 0;
    cur_vid = VID_W'(vid); cur_onchip = onchip;
    @(negedge clk);
    start = 1; src_vid = VID_W'(vid); nbeats = BEAT_W'(n); from_onchip = onchip;
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    @(negedge clk);
    for (int p = 0; p < N_PE; p++) check(exp_beat[p] == n, $sformatf("pe %0d got %0d beats of %0d", p, exp_beat[p], n));
  endtask

  initial begin
    int cyc;
    start = 0; src_vid = '0; nbeats = '0; from_onchip = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fetch(7, 5, 0, cyc);
    fetch(123, 48, 0, cyc);
    fetch(3, 6, 1, cyc);
    check(cyc == 7, $sformatf("on-chip fetch of 6 beats took %0d cycles, expected 7", cyc));
    fetch(9, 1, 1, cyc);
    check(cyc == 2, $sformatf("on-chip fetch of 1 beat took %0d cycles, expected 2", cyc));
    check(dones == 4, $sformatf("done pulses %0d", dones));
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
