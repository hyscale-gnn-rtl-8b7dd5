// Body shared by the end-to-end testbenches of hyscale_kernel: stimulus,
// device-memory model, software reference of the two-layer forward pass,
// mechanism counters. The including module declares the DUT signals and the
// size localparams (N_LAYERS, N_PE, COLS, F_MAX, FOUT_MAX, DST_MAX, F0..F2,
// NV0..NV2, MAXE, CYCLE_LIMIT and the derived B0, B1, OT1, OT2, IN_ROWS_MAX,
// OTM, SUB).

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic elem_t ref_mul(input elem_t a, input elem_t w);
    longint p;
    p = longint'(a) * longint'(w);
    return elem_t'(p >>> 16);
  endfunction

  // ---------------- model data
  elem_t X  [NV0][B0*VEC];                 // mini-batch features, zero padded
  elem_t W1 [2*B0*VEC][OT1*COLS];
  elem_t W2 [2*B1*VEC][OT2*COLS];
  elem_t b1 [OT1*COLS];
  elem_t b2 [OT2*COLS];
  edge_t E1 [MAXE];
  edge_t E2 [MAXE];
  int ne1, ne2;
  elem_t H1 [NV1][OT1*COLS];
  elem_t H2 [NV2][OT2*COLS];

  // ---------------- mechanism counters
  int n_mem_stall = 0, n_onchip = 0, n_out_stall = 0, n_relu_clip = 0;
  int n_fetch = 0, n_edges = 0, n_conflict = 0, n_mem_req = 0;

  // ---------------- device memory model: 5-cycle latency, random ready
  logic [VID_W+BEAT_W-1:0] pipe [5];
  logic pv [5];
  always_ff @(posedge clk) begin
    mem_req_ready <= ($urandom_range(0, 3) != 0);
    pv[0] <= mem_req_valid && mem_req_ready;
    pipe[0] <= {mem_req_vid, mem_req_beat};
    for (int k = 1; k < 5; k++) begin pv[k] <= pv[k-1]; pipe[k] <= pipe[k-1]; end
  end
  always_comb begin
    int v, b;
    v = int'(pipe[4][VID_W+BEAT_W-1:BEAT_W]);
    b = int'(pipe[4][BEAT_W-1:0]);
    for (int i = 0; i < VEC; i++) mem_rsp_data[i] = (v < NV0 && b < B0) ? X[v][b*VEC+i] : 32'sd999999;
  end
  assign mem_rsp_valid = pv[4];

  always @(posedge clk) if (rst_n) begin
    if (mem_req_valid && !mem_req_ready) n_mem_stall++;
    if (mem_req_valid && mem_req_ready) n_mem_req++;
    if (out_valid && !out_ready) n_out_stall++;
  end

  function automatic elem_t rnd(input int span);
    return elem_t'($urandom_range(0, 2 * span)) - elem_t'(span);
  endfunction

  // edges into dst 0..nd-1 from sources 0..ns-1, sorted by source.
  // sage: neighbour edges in slot 0 with weight 1/deg, self edge in slot 1.
  // gcn: self loop plus neighbours, weight 1/sqrt(deg(u) deg(v)) (approximated
  // by a random value; the kernel takes the weight as given).
  task automatic make_layer(input int ns, input int nd, input bit sage, output edge_t E [MAXE], output int ne);
    int deg [64];
    bit adj [64][64];
    for (int v = 0; v < nd; v++) begin
      for (int u = 0; u < ns; u++) adj[u][v] = 0;
      deg[v] = $urandom_range(1, 5);
      for (int k = 0; k < deg[v]; k++) adj[$urandom_range(0, ns - 1)][v] = 1;
      deg[v] = 0;
      for (int u = 0; u < ns; u++) deg[v] += adj[u][v];
    end
    ne = 0;
    for (int u = 0; u < ns; u++) begin
      for (int v = 0; v < nd; v++) begin
        if (adj[u][v] && ne < MAXE) begin
          E[ne].src = VID_W'(u); E[ne].dst = VID_W'(v); E[ne].slot = 1'b0; E[ne].last = 1'b0;
          E[ne].weight = sage ? elem_t'(32'h1_0000 / deg[v]) : elem_t'($urandom_range(32'h2000, 32'h8000));
          ne++;
        end
        // self term: vertex v of this layer is vertex v of the layer below
        if (u == v && ne < MAXE) begin
          E[ne].src = VID_W'(u); E[ne].dst = VID_W'(v); E[ne].last = 1'b0;
          E[ne].slot   = sage;
          E[ne].weight = sage ? elem_t'(32'h1_0000) : elem_t'($urandom_range(32'h2000, 32'h8000));
          ne++;
        end
      end
    end
    E[ne-1].last = 1'b1;
  endtask

  task automatic write_weights(input int l, input int rows, input int ot, input bit second);
    for (int r = 0; r < rows; r++) for (int t = 0; t < ot; t++) begin
      @(negedge clk);
      wt_wr_en = 1; wt_wr_addr = 32'((l * IN_ROWS_MAX + r) * OTM + t);
      for (int c = 0; c < COLS; c++) wt_wr_data[c] = second ? W2[r][t*COLS+c] : W1[r][t*COLS+c];
    end
    for (int t = 0; t < ot; t++) begin
      @(negedge clk);
      wt_wr_en = 0; bias_wr_en = 1; bias_wr_addr = 32'(l * OTM + t);
      for (int c = 0; c < COLS; c++) bias_wr_data[c] = second ? b2[t*COLS+c] : b1[t*COLS+c];
    end
    @(negedge clk);
    wt_wr_en = 0; bias_wr_en = 0;
  endtask

  task automatic reference(input bit sage);
    int ab1, ab2;
    ab1 = sage ? 2 * B0 * VEC : B0 * VEC;
    ab2 = sage ? 2 * B1 * VEC : B1 * VEC;
    for (int v = 0; v < NV1; v++) begin
      elem_t a [2*B0*VEC];
      for (int i = 0; i < ab1; i++) a[i] = 0;
      for (int e = 0; e < ne1; e++) if (int'(E1[e].dst) == v)
        for (int i = 0; i < B0*VEC; i++)
          a[(E1[e].slot ? B0*VEC : 0) + i] += ref_mul(X[E1[e].src][i], E1[e].weight);
      for (int c = 0; c < OT1*COLS; c++) begin
        elem_t s;
        s = b1[c];
        for (int i = 0; i < ab1; i++) s += ref_mul(a[i], W1[i][c]);
        if (s < 0) n_relu_clip++;
        H1[v][c] = (s < 0) ? 0 : s;
      end
    end
    for (int v = 0; v < NV2; v++) begin
      elem_t a [2*B1*VEC];
      for (int i = 0; i < ab2; i++) a[i] = 0;
      for (int e = 0; e < ne2; e++) if (int'(E2[e].dst) == v)
        for (int i = 0; i < B1*VEC; i++)
          a[(E2[e].slot ? B1*VEC : 0) + i] += ref_mul(H1[E2[e].src][i], E2[e].weight);
      for (int c = 0; c < OT2*COLS; c++) begin
        elem_t s;
        s = b2[c];
        for (int i = 0; i < ab2; i++) s += ref_mul(a[i], W2[i][c]);
        H2[v][c] = s;
      end
    end
  endtask

  task automatic run_model(input bit sage);
    int k, outs, cyc, mem_req_before;
    bit in_l2;
    // data
    for (int v = 0; v < NV0; v++) for (int i = 0; i < B0*VEC; i++) X[v][i] = (i < F0) ? rnd(32'h2_0000) : 0;
    for (int r = 0; r < 2*B0*VEC; r++) for (int c = 0; c < OT1*COLS; c++)
      W1[r][c] = ((r % (B0*VEC)) < F0 && c < F1) ? rnd(32'h4000) : 0;
    for (int r = 0; r < 2*B1*VEC; r++) for (int c = 0; c < OT2*COLS; c++)
      W2[r][c] = ((r % (B1*VEC)) < F1 && c < F2) ? rnd(32'h4000) : 0;
    for (int c = 0; c < OT1*COLS; c++) b1[c] = (c < F1) ? rnd(32'h1_0000) : 0;
    for (int c = 0; c < OT2*COLS; c++) b2[c] = (c < F2) ? rnd(32'h1_0000) : 0;
    make_layer(NV0, NV1, sage, E1, ne1);
    make_layer(NV1, NV2, sage, E2, ne2);
    reference(sage);
    write_weights(0, (sage ? 2 : 1) * B0 * VEC, OT1, 0);
    write_weights(1, (sage ? 2 : 1) * B1 * VEC, OT2, 1);
    // configuration
    cfg[0].in_beats = BEAT_W'(B0); cfg[0].concat = sage; cfg[0].num_dst = VID_W'(NV1);
    cfg[0].out_tiles = BEAT_W'(OT1); cfg[0].relu = 1'b1;
    cfg[1].in_beats = BEAT_W'(OT1 * SUB); cfg[1].concat = sage; cfg[1].num_dst = VID_W'(NV2);
    cfg[1].out_tiles = BEAT_W'(OT2); cfg[1].relu = 1'b0;
    num_layers = 8'd2;
    mem_req_before = n_mem_req;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    k = 0; in_l2 = 0; outs = 0; cyc = 0;
    while (!done && cyc < CYCLE_LIMIT) begin
      edge_t e;
      e = in_l2 ? E2[k] : E1[k];
      edge_valid = (k < (in_l2 ? ne2 : ne1)) && ($urandom_range(0, 4) != 0);
      edge_in = e;
      out_ready = ($urandom_range(0, 3) != 0);
      @(posedge clk);
      cyc++;
      if (out_valid && out_ready) begin
        int v, b;
        v = int'(out_vid); b = int'(out_beat);
        for (int i = 0; i < VEC; i++)
          check(v < NV2 && out_data[i] == H2[v][b*VEC+i],
                $sformatf("out v %0d col %0d: %0d exp %0d", v, b*VEC+i, out_data[i], H2[v][b*VEC+i]));
        outs++;
      end
      if (edge_valid && edge_ready) begin
        k++;
        if (!in_l2 && k == ne1) begin in_l2 = 1; k = 0; end
      end
      @(negedge clk);
    end
    edge_valid = 0;
    check(done, "operation finished");
    check(in_l2 && k == ne2, "all edges consumed");
    check(outs == NV2 * OT2 * SUB, $sformatf("output beats %0d exp %0d", outs, NV2 * OT2 * SUB));
    check(stat_edges == 32'(ne1 + ne2), $sformatf("stat_edges %0d", stat_edges));
    // layer 1 reads each distinct source from device memory; every other
    // fetch is a layer-2 read from the on-chip result buffer
    begin
      int distinct;
      distinct = 1;
      for (int e = 1; e < ne1; e++) if (E1[e].src != E1[e-1].src) distinct++;
      check(n_mem_req - mem_req_before == distinct * B0,
            $sformatf("device memory beats %0d exp %0d", n_mem_req - mem_req_before, distinct * B0));
      n_onchip += int'(stat_fetches) - distinct;
    end
    n_fetch += int'(stat_fetches); n_edges += int'(stat_edges); n_conflict += int'(stat_conflicts);
    $display("%s: %0d edges, %0d feature fetches, %0d conflict cycles, %0d cycles",
             sage ? "GraphSAGE" : "GCN", stat_edges, stat_fetches, stat_conflicts, stat_cycles);
  endtask

  initial begin
    wt_wr_en = 0; bias_wr_en = 0; wt_wr_addr = '0; bias_wr_addr = '0; start = 0; num_layers = '0;
    edge_valid = 0; edge_in = '0; out_ready = 1;
    for (int c = 0; c < COLS; c++) begin wt_wr_data[c] = '0; bias_wr_data[c] = '0; end
    for (int l = 0; l < N_LAYERS; l++) cfg[l] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_model(1);
    run_model(0);
    $display("mechanisms: reuse %0d fetches for %0d edges, %0d conflict cycles, %0d memory stalls, %0d on-chip fetches, %0d ReLU clips, %0d output stalls",
             n_fetch, n_edges, n_conflict, n_mem_stall, n_onchip, n_relu_clip, n_out_stall);
    check(n_fetch < n_edges, "feature reuse");
    check(n_conflict > 0, "routing conflicts");
    check(n_mem_stall > 0, "device memory back-pressure");
    check(n_onchip > 0, "on-chip layer-to-layer reads");
    check(n_relu_clip > 0, "ReLU clipping");
    check(n_out_stall > 0, "output back-pressure");
    check(B0 > 1 && OT1 > 1, "multi-tile update");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2 * CYCLE_LIMIT + 200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
