// output_layer_unit: the N_OUT output neurons of the reservoir read-out.
//
// Each clock that memory2 delivers a W^OUT row for a flipped RC neuron, all
// N_OUT output PEs add (neuron became 1) or subtract (became 0) their weight.
// o_vec therefore tracks O_k = sum_j W^OUT_k,j S_j with one clock per flip
// instead of one per neuron. Output k is o_vec[k*O_BITS +: O_BITS].
// Ten PEs fed from Memory2 follow the published output layer; the packed
// output layout is this design's choice. Timing: O is updated at the clock
// edge that ends the cycle in which acc_en is high.
module output_layer_unit
  import cbm_pkg::*;
#(
  parameter int N_OUT = N_OUT_D
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  input  logic                          acc_en,
  input  logic                          acc_add,
  input  logic [N_OUT*W_OUT_BITS-1:0]   w_row,
  output logic [N_OUT*O_BITS-1:0]       o_vec
);
  for (genvar k = 0; k < N_OUT; k++) begin : g_pe
    output_pe u_pe (
      .clk(clk), .rst_n(rst_n), .clear(clear), .acc_en(acc_en), .acc_add(acc_add),
      .w(w_row[k*W_OUT_BITS +: W_OUT_BITS]), .o(o_vec[k*O_BITS +: O_BITS])
    );
  end
endmodule
