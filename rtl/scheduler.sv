// scheduler: CBM-specific delta-driven MAC (DDMAC) scheduler.
//
// On load the scheduler takes the new CBM states and input pulses; the states
// it held until then are the previous states, and the XOR of the two is
// stored as delta info (the previous states need no register of their own,
// since only their XOR with the present states is ever used). From the
// next cycle on, a priority circuit picks the lowest set delta bit and an
// address encoder turns it into an index; one index leaves per clock and its
// bit is cleared. Only flipped neurons are ever scheduled, so a step with n
// flips costs n MAC cycles instead of N_CBM + N_IN.
//   stream i  : flipped CBM neurons (0..N_CBM-1) and flipped input pulses
//               (N_CBM..N_CBM+N_IN-1), for the CBM processing unit
//   stream i' : flipped RC-assigned CBM neurons, for the output layer
// add/oadd is the ADD/SUB control: 1 when the source's new value is 1.
// clear zeroes the present and previous states, so that the first step after
// a clear schedules every neuron that is 1 and builds Z and O from nothing.
// Lowest-index-first order is this design's choice.
module scheduler
  import cbm_pkg::*;
#(
  parameter int N_CBM = N_CBM_D,
  parameter int N_IN  = N_IN_D,
  localparam int NI   = N_CBM + N_IN,
  localparam int IW   = $clog2(NI),
  localparam int OW   = $clog2(N_CBM)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic               load,
  input  logic [N_CBM-1:0]   s_vec,
  input  logic [N_IN-1:0]    pulse_vec,
  input  logic [N_CBM-1:0]   rc_mask,
  // stream i
  output logic               valid,
  output logic [IW-1:0]      idx,
  output logic               add,
  output logic               is_in,
  // stream i'
  output logic               ovalid,
  output logic [OW-1:0]      oidx,
  output logic               oadd,
  output logic               busy
);

  logic [NI-1:0]    present, delta;
  logic [N_CBM-1:0] delta_o;

  // priority circuit + address encoder: lowest set bit
  function automatic logic [IW-1:0] first_one_i(input logic [NI-1:0] v);
    first_one_i = '0;
    for (int k = NI - 1; k >= 0; k--) if (v[k]) first_one_i = IW'(k);
  endfunction
  function automatic logic [OW-1:0] first_one_o(input logic [N_CBM-1:0] v);
    first_one_o = '0;
    for (int k = N_CBM - 1; k >= 0; k--) if (v[k]) first_one_o = OW'(k);
  endfunction

  always_comb begin
    valid  = |delta;
    idx    = first_one_i(delta);
    add    = present[idx];
    is_in  = idx >= IW'(N_CBM);
    ovalid = |delta_o;
    oidx   = first_one_o(delta_o);
    oadd   = present[IW'(oidx)];
    busy   = valid || ovalid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      present  <= '0;
      delta    <= '0;
      delta_o  <= '0;
    end else if (clear) begin
      present  <= '0;
      delta    <= '0;
      delta_o  <= '0;
    end else if (load) begin
      present  <= {pulse_vec, s_vec};
      delta    <= {pulse_vec, s_vec} ^ present;
      delta_o  <= (s_vec ^ present[N_CBM-1:0]) & rc_mask;
    end else begin
      if (valid)  delta[idx]    <= 1'b0;
      if (ovalid) delta_o[oidx] <= 1'b0;
    end
  end

  // A new step must not be loaded while flips of the last one are pending.
  a_no_load_busy: assert property (@(posedge clk) disable iff (!rst_n) load |-> !busy);

endmodule
