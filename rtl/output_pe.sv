// output_pe: one output-layer neuron (PE^OUT).
//
// O accumulates one 16-bit signed weight per scheduled event: add when the
// RC neuron that flipped became 1, subtract when it became 0, so that
// O_k = sum_j W^OUT_k,j S_j over RC-assigned neurons. clear zeroes O.
// The add/subtract PE follows the published PE^OUT; the 26-bit two's
// complement accumulator width is this design's choice.
module output_pe
  import cbm_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  input  logic                          acc_en,
  input  logic                          acc_add,
  input  logic signed [W_OUT_BITS-1:0]  w,
  output logic signed [O_BITS-1:0]      o
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      o <= '0;
    else if (clear)  o <= '0;
    else if (acc_en) o <= acc_add ? o + O_BITS'(w) : o - O_BITS'(w);
  end
endmodule
