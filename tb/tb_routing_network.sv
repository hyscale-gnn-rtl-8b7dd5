// tb_routing_network -- random traffic from every scatter-PE port to random
// destinations. Each output must receive exactly the beats whose destination
// it owns (dst mod N_PE), each input's beats must arrive in the order sent,
// nothing may be lost or duplicated, conflicts must stall (counted), and
// conflict-free traffic must pass N_PE beats per cycle.
module tb_routing_network;
  import hyscale_pkg::*;
  localparam int N_PE = 4;
  localparam int PER_IN = 200;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N_PE-1:0] in_valid, in_ready, out_valid;
  msg_t in_msg [N_PE];
  msg_t out_msg [N_PE];

  routing_network #(.N_PE(N_PE)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // message i of input p carries p in data[0] and i in data[1]
  int sent [N_PE], recv_seq [N_PE], received = 0, stalls = 0;
  bit conflict_free;


  task automatic drive_next(input int p);
    if (sent[p] < PER_IN) begin
      in_valid[p] = 1;
      in_msg[p].dst  = conflict_free ? VID_W'(p + N_PE * $urandom_range(0, 50))
                                     : VID_W'($urandom_range(0, 200));
      in_msg[p].beat = BEAT_W'($urandom_range(0, 5));
      in_msg[p].data = '0;
      in_msg[p].data[0] = elem_t'(p);
      in_msg[p].data[1] = elem_t'(sent[p]);
    end else in_valid[p] = 0;
  endtask

  always @(negedge clk) if (rst_n) begin
    for (int o = 0; o < N_PE; o++) if (out_valid[o]) begin
      int src, seq;
      src = int'(out_msg[o].data[0]);
      seq = int'(out_msg[o].data[1]);
      check(int'(out_msg[o].dst % N_PE) == o, $sformatf("out %0d got dst %0d", o, out_msg[o].dst));
      check(src >= 0 && src < N_PE && seq == recv_seq[src], $sformatf("order from %0d: %0d exp %0d", src, seq, recv_seq[src]));
      if (src >= 0 && src < N_PE) recv_seq[src]++;
      received++;
    end
  end

  initial begin
    int t0;
    in_valid = '0;
    for (int p = 0; p < N_PE; p++) begin in_msg[p] = '0; sent[p] = 0; recv_seq[p] = 0; end
    conflict_free = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int p = 0; p < N_PE; p++) drive_next(p);
    while (in_valid != '0) begin
      logic [N_PE-1:0] acc;
      @(negedge clk); #1;
      acc = in_valid & in_ready;
      for (int p = 0; p < N_PE; p++) if (in_valid[p] && !in_ready[p]) stalls++;
      @(posedge clk); #1;
      for (int p = 0; p < N_PE; p++) if (acc[p]) begin sent[p]++; drive_next(p); end
    end
    repeat (3) @(posedge clk);
    check(received == N_PE * PER_IN, $sformatf("received %0d of %0d", received, N_PE * PER_IN));
    check(stalls > 0, "random traffic produced routing conflicts");
    // conflict-free phase: full throughput
    for (int p = 0; p < N_PE; p++) begin sent[p] = 0; recv_seq[p] = 0; end
    received = 0; conflict_free = 1;
    @(posedge clk); #1;
    for (int p = 0; p < N_PE; p++) drive_next(p);
    t0 = $time;
    while (in_valid != '0) begin
      logic [N_PE-1:0] acc;
      @(negedge clk); #1;
      acc = in_valid & in_ready;
      for (int p = 0; p < N_PE; p++) if (in_valid[p] && !in_ready[p]) stalls++;
      @(posedge clk); #1;
      for (int p = 0; p < N_PE; p++) if (acc[p]) begin sent[p]++; drive_next(p); end
    end
    check(($time - t0) / 10 <= PER_IN + 1, $sformatf("conflict-free traffic took %0d cycles", ($time - t0) / 10));
    repeat (3) @(posedge clk);
    check(received == N_PE * PER_IN, $sformatf("conflict-free received %0d", received));
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
