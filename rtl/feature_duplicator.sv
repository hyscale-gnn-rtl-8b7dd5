// feature_duplicator -- fetches one source-vertex feature and broadcasts it to
// every scatter PE of the aggregate kernel.
//
// The aggregate kernel processes edges sorted by source vertex, so each source
// feature is read once and then reused by every edge leaving that vertex. On
// `start` the duplicator reads the `nbeats` beats of vertex `src_vid`, either
// from device memory (first layer: the mini-batch feature matrix X') or from
// the update kernel's result buffer (later layers: the previous layer's output
// never leaves the chip). Every returned beat is written, with its beat index,
// into N_PE registered copies of the broadcast bus, one per scatter PE, so the
// fan-out to the PEs starts from its own flip-flops. `done` pulses for one
// cycle after the last beat has been broadcast.
//
// Device-memory port: req_valid/req_ready handshake per beat request,
// responses return in order on rsp_valid with any latency. On-chip port: the
// read address is presented on one cycle and the data is taken the same cycle.
// Timing: on-chip fetch is one beat per cycle. A beat appears on the
// broadcast bus one cycle after it is read or returned; `done` pulses in the
// same cycle as the last broadcast beat.
//
// From the paper: the name, the broadcast of a fetched feature to all scatter
// PEs, and the on-chip path from the update kernel to the next aggregation.
// The request/response handshake and the per-PE register copies are this
// design's choices.
module feature_duplicator
  import hyscale_pkg::*;
#(
  parameter int N_PE = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // control
  input  logic              start,
  input  logic [VID_W-1:0]  src_vid,
  input  logic [BEAT_W-1:0] nbeats,
  input  logic              from_onchip,
  output logic              busy,
  output logic              done,
  // device memory read port
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic [VID_W-1:0]  mem_req_vid,
  output logic [BEAT_W-1:0] mem_req_beat,
  input  logic              mem_rsp_valid,
  input  vec_t              mem_rsp_data,
  // on-chip result buffer read port
  output logic              onchip_rd_en,
  output logic [VID_W-1:0]  onchip_rd_vid,
  output logic [BEAT_W-1:0] onchip_rd_beat,
  input  vec_t              onchip_rd_data,
  // broadcast to the scatter PEs
  output logic [N_PE-1:0]   bc_valid,
  output logic [BEAT_W-1:0] bc_beat [N_PE],
  output vec_t              bc_data [N_PE]
);

  logic              active, onchip;
  logic [VID_W-1:0]  vid;
  logic [BEAT_W-1:0] total, req_cnt, rsp_cnt;
  logic              beat_in;
  vec_t              beat_data;
  logic              last_in;

  assign busy = active;

  assign mem_req_valid = active && !onchip && (req_cnt < total);
  assign mem_req_vid   = vid;
  assign mem_req_beat  = req_cnt;

  assign onchip_rd_en   = active && onchip && (req_cnt < total);
  assign onchip_rd_vid  = vid;
  assign onchip_rd_beat = req_cnt;

  always_comb begin
    if (onchip) begin
      beat_in   = onchip_rd_en;
      beat_data = onchip_rd_data;
    end else begin
      beat_in   = active && mem_rsp_valid;
      beat_data = mem_rsp_data;
    end
  end
  assign last_in = beat_in && (rsp_cnt == total - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active  <= 1'b0;
      onchip  <= 1'b0;
      vid     <= '0;
      total   <= '0;
      req_cnt <= '0;
      rsp_cnt <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!active) begin
        if (start) begin
          active  <= (nbeats != '0);
          done    <= (nbeats == '0);
          onchip  <= from_onchip;
          vid     <= src_vid;
          total   <= nbeats;
          req_cnt <= '0;
          rsp_cnt <= '0;
        end
      end else begin
        if ((mem_req_valid && mem_req_ready) || onchip_rd_en) req_cnt <= req_cnt + 1'b1;
        if (beat_in) rsp_cnt <= rsp_cnt + 1'b1;
        if (last_in) begin
          active <= 1'b0;
          done   <= 1'b1;
        end
      end
    end
  end

  // One register copy of the broadcast bus per scatter PE.
  for (genvar p = 0; p < N_PE; p++) begin : g_copy
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        bc_valid[p] <= 1'b0;
        bc_beat[p]  <= '0;
        bc_data[p]  <= '0;
      end else begin
        bc_valid[p] <= beat_in;
        if (beat_in) begin
          bc_beat[p] <= rsp_cnt;
          bc_data[p] <= beat_data;
        end
      end
    end
  end

endmodule
