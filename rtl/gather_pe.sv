// gather_pe -- gather processing element with its intermediate-result buffer.
//
// A gather PE owns every destination vertex v with v mod N_PE equal to its
// index, and keeps their partially aggregated rows on chip. Each beat that
// arrives from the routing network is added, element by element, into row
// v / N_PE at its beat position (read-modify-write in one cycle, so a beat
// that follows one to the same place sees the updated sum). Nothing is
// written back to device memory: when the layer's edges are done the update
// kernel reads the rows straight out of this buffer.
//
// Interface:
//   in_valid/in_msg   accumulate port, one beat per cycle, always accepted
//   clear_*           zero rows [0, clear_rows) x beats [0, clear_beats)
//                     before a layer starts, one beat per cycle; clear_busy
//                     stays high until the last beat is zeroed
//   rd_row/rd_beat    read port for the update kernel, data the same cycle
// The buffer holds ROWS rows of AB_MAX beats. The order of the additions
// follows the order beats arrive; fixed-point addition makes the sum
// independent of that order.
//
// From the paper: gather PEs, each beside its own "intermediate results"
// buffer, and the direct hand-over of aggregated rows to the update kernel.
// The interleaved ownership, the clear pass and the single-cycle
// read-modify-write are this design's choices.
module gather_pe
  import hyscale_pkg::*;
#(
  parameter int N_PE   = 8,
  parameter int ROWS   = 4096,  // destination rows held by this PE
  parameter int AB_MAX = 96     // beats of the longest aggregated row
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  msg_t              in_msg,
  input  logic              clear_start,
  input  logic [VID_W-1:0]  clear_rows,
  input  logic [BEAT_W-1:0] clear_beats,
  output logic              clear_busy,
  input  logic [VID_W-1:0]  rd_row,
  input  logic [BEAT_W-1:0] rd_beat,
  output vec_t              rd_data
);

  localparam int DEPTH = ROWS * AB_MAX;
  localparam int AW    = $clog2(DEPTH);

  vec_t mem [DEPTH];

  function automatic logic [AW-1:0] addr_of(logic [VID_W-1:0] row, logic [BEAT_W-1:0] beat);
    return AW'(row * AB_MAX + beat);
  endfunction

  logic [VID_W-1:0]  cl_row, cl_rows;
  logic [BEAT_W-1:0] cl_beat, cl_beats;
  logic [VID_W-1:0]  in_row;
  logic [AW-1:0]     in_addr;

  assign in_row  = in_msg.dst / VID_W'(N_PE);
  assign in_addr = addr_of(in_row, in_msg.beat);
  assign rd_data = mem[addr_of(rd_row, rd_beat)];

  always_ff @(posedge clk) begin
    if (clear_busy)    mem[addr_of(cl_row, cl_beat)] <= '0;
    else if (in_valid) mem[in_addr] <= vec_add(mem[in_addr], in_msg.data);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clear_busy <= 1'b0;
      cl_row     <= '0;
      cl_beat    <= '0;
      cl_rows    <= '0;
      cl_beats   <= '0;
    end else if (!clear_busy) begin
      if (clear_start && clear_rows != '0 && clear_beats != '0) begin
        clear_busy <= 1'b1;
        cl_rows    <= clear_rows;
        cl_beats   <= clear_beats;
        cl_row     <= '0;
        cl_beat    <= '0;
      end
    end else begin
      if (cl_beat == cl_beats - 1'b1) begin
        cl_beat <= '0;
        if (cl_row == cl_rows - 1'b1) clear_busy <= 1'b0;
        cl_row <= cl_row + 1'b1;
      end else begin
        cl_beat <= cl_beat + 1'b1;
      end
    end
  end

  a_no_accumulate_while_clearing: assert property (@(posedge clk) disable iff (!rst_n)
    !(clear_busy && in_valid));
  a_row_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> (in_row < ROWS && int'(in_msg.beat) < AB_MAX));

endmodule
