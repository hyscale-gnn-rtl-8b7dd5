// tb_aggregate_kernel -- random mini-batch layers through the whole
// scatter-gather kernel. Edges are generated, sorted by source and fed with
// random gaps; features come from a device-memory model with latency and
// random back-pressure (first run) or from a combinational on-chip port
// (second run). Every aggregated row is compared with a software sum of the
// weighted source features, in both halves of a GraphSAGE row. The kernel
// must fetch each source feature exactly once (reuse), count every edge,
// and report routing conflicts.
module tb_aggregate_kernel;
  import hyscale_pkg::*;
  localparam int N_PE = 4, B_MAX = 4, DST_MAX = 16, NSRC = 12, MAXE = 80;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, concat, from_onchip, busy, done, edge_valid, edge_ready;
  logic [BEAT_W-1:0] in_beats, mem_req_beat, onchip_rd_beat, rd_beat;
  logic [VID_W-1:0] num_dst, mem_req_vid, onchip_rd_vid, rd_vid;
  edge_t edge_in;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid, onchip_rd_en;
  vec_t mem_rsp_data, onchip_rd_data, rd_data;
  logic [31:0] stat_fetches, stat_edges, stat_conflicts;

  aggregate_kernel #(.N_PE(N_PE), .B_MAX(B_MAX), .DST_MAX(DST_MAX)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic elem_t feat(input int v, input int i, input bit onchip);
    return elem_t'((v * 7919 + i * 104729 + (onchip ? 55 : 0)) % 200000) - 100000;
  endfunction
  function automatic vec_t feat_beat(input int v, input int b, input bit onchip);
    vec_t r;
    for (int i = 0; i < VEC; i++) r[i] = feat(v, b * VEC + i, onchip);
    return r;
  endfunction
  function automatic elem_t ref_mul(input elem_t a, input elem_t w);
    longint p;
    p = longint'(a) * longint'(w);
    return elem_t'(p >>> 16);
  endfunction

  // device memory model: 4-cycle latency, random ready
  logic [VID_W+BEAT_W-1:0] pipe [4];
  logic pv [4];
  always_ff @(posedge clk) begin
    mem_req_ready <= ($urandom_range(0, 2) != 0);
    pv[0] <= mem_req_valid && mem_req_ready;
    pipe[0] <= {mem_req_vid, mem_req_beat};
    for (int k = 1; k < 4; k++) begin pv[k] <= pv[k-1]; pipe[k] <= pipe[k-1]; end
  end
  assign mem_rsp_valid  = pv[3];
  assign mem_rsp_data   = feat_beat(int'(pipe[3][VID_W+BEAT_W-1:BEAT_W]), int'(pipe[3][BEAT_W-1:0]), 0);
  assign onchip_rd_data = feat_beat(int'(onchip_rd_vid), int'(onchip_rd_beat), 1);

  edge_t edges [MAXE];
  int ne, nsrc_used;

  task automatic make_edges(input int nd, input bit cc);
    ne = 0; nsrc_used = 0;
    for (int s = 0; s < NSRC; s++) begin
      int deg;
      deg = (s == 2) ? 0 : $urandom_range(1, 6);     // source 2 has no edges
      if (s == 5) deg = 2 * N_PE + 1;                // longer than one PE round
      if (deg > 0) nsrc_used++;
      for (int k = 0; k < deg && ne < MAXE; k++) begin
        edges[ne].src    = VID_W'(s);
        edges[ne].dst    = VID_W'($urandom_range(0, nd - 1));
        edges[ne].weight = elem_t'($urandom_range(0, 32'h2_0000)) - 32'sh1_0000;
        edges[ne].slot   = cc ? 1'($urandom_range(0, 1)) : 1'b0;
        edges[ne].last   = 1'b0;
        ne++;
      end
    end
    edges[ne-1].last = 1'b1;
  endtask

  task automatic run(input int nd, input int nb, input bit cc, input bit onchip);
    int k;
    make_edges(nd, cc);
    @(negedge clk);
    start = 1; in_beats = BEAT_W'(nb); concat = cc; num_dst = VID_W'(nd); from_onchip = onchip;
    @(negedge clk);
    start = 0;
    k = 0;
    while (!done) begin
      edge_valid = (k < ne) && ($urandom_range(0, 3) != 0);
      edge_in = (k < ne) ? edges[k] : '0;
      @(posedge clk);
      if (edge_valid && edge_ready) k++;
      @(negedge clk);
    end
    edge_valid = 0;
    check(k == ne, $sformatf("edges consumed %0d of %0d", k, ne));
    check(stat_edges == 32'(ne), $sformatf("stat_edges %0d exp %0d", stat_edges, ne));
    check(stat_fetches == 32'(nsrc_used), $sformatf("stat_fetches %0d exp %0d (one per source)", stat_fetches, nsrc_used));
    $display("run: %0d edges, %0d fetches, %0d conflict cycles", ne, stat_fetches, stat_conflicts);
    // compare every row
    for (int v = 0; v < nd; v++) for (int b = 0; b < (cc ? 2 * nb : nb); b++) begin
      rd_vid = VID_W'(v); rd_beat = BEAT_W'(b);
      #1;
      for (int i = 0; i < VEC; i++) begin
        elem_t s;
        s = 0;
        for (int e = 0; e < ne; e++)
          if (int'(edges[e].dst) == v && ((b >= nb) == edges[e].slot))
            s += ref_mul(feat(int'(edges[e].src), (b % nb) * VEC + i, onchip), edges[e].weight);
        check(rd_data[i] == s, $sformatf("v %0d beat %0d elem %0d: %0d exp %0d", v, b, i, rd_data[i], s));
      end
    end
  endtask

  int conflicts_total = 0;
  initial begin
    start = 0; concat = 0; from_onchip = 0; in_beats = '0; num_dst = '0; edge_valid = 0; edge_in = '0;
    rd_vid = '0; rd_beat = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(13, 3, 1, 0);
    conflicts_total += int'(stat_conflicts);
    run(16, 4, 0, 1);
    conflicts_total += int'(stat_conflicts);
    run(5, 2, 1, 1);
    conflicts_total += int'(stat_conflicts);
    check(conflicts_total > 0, "routing conflicts occurred");
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
