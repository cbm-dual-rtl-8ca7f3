// input_layer_unit: turns 8-bit time-series samples into pulses.
//
// A data point carries one 8-bit value v_j per input neuron j. The point is
// presented to the reservoir for STEPS_PER_POINT (256) CBM steps, and input
// neuron j is 1 during the first v_j of those steps and 0 afterwards, so each
// input flips at most twice per point and costs the scheduler almost nothing.
// A one-point buffer accepts the next point on a valid/ready handshake while
// the current one runs. consume (asserted by the controller in the cycle
// that loads the first step of a point) moves the buffer into the current
// point; pulse_vec already shows the new point in that cycle. avail tells
// the controller a point is waiting.
// Pulse-width coding and the handshake are this design's choices; the paper
// states only that 8-bit inputs become 256-step pulses.
module input_layer_unit
  import cbm_pkg::*;
#(
  parameter int N_IN            = N_IN_D,
  parameter int STEPS_PER_POINT = STEPS_PER_POINT_D,
  localparam int PW             = $clog2(STEPS_PER_POINT)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [N_IN*IN_BITS-1:0]  in_data,
  input  logic                     consume,
  input  logic [PW-1:0]            phase,
  output logic                     avail,
  output logic [N_IN-1:0]          pulse_vec
);

  logic [N_IN*IN_BITS-1:0] buf_q, cur_q, vals;
  logic                    full;

  always_comb begin
    in_ready = !full;
    avail    = full;
    vals     = consume ? buf_q : cur_q;
    for (int j = 0; j < N_IN; j++)
      pulse_vec[j] = (9'(phase) < 9'(vals[j*IN_BITS +: IN_BITS]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full  <= 1'b0;
      buf_q <= '0;
      cur_q <= '0;
    end else if (clear) begin
      full  <= 1'b0;
      cur_q <= '0;
    end else begin
      if (in_valid && in_ready) begin
        buf_q <= in_data;
        full  <= 1'b1;
      end
      if (consume && full) begin
        cur_q <= buf_q;
        full  <= 1'b0;
      end
    end
  end

  a_consume_avail: assert property (@(posedge clk) disable iff (!rst_n) consume |-> full);

endmodule
