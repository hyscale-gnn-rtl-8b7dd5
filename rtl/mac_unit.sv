// mac_unit -- one multiply-and-accumulate cell of the update kernel's
// systolic array.
//
// Holds one weight (loaded with w_load), multiplies the activation of its row
// by it and adds the partial sum arriving from the cell above; the result is
// registered and passed to the cell below on the next cycle.
module mac_unit
  import hyscale_pkg::*;
(
  input  logic  clk,
  input  logic  w_load,
  input  elem_t w_in,
  input  elem_t a_in,
  input  elem_t psum_in,
  output elem_t psum_out
);

  elem_t w;

  always_ff @(posedge clk) begin
    if (w_load) w <= w_in;
    psum_out <= psum_in + fx_mul(a_in, w);
  end

endmodule
