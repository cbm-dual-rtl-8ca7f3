// cbm_pe: one neuron of the CBM processing unit.
//
// Two parts, as in the published PE: the input value Z calculate unit and the
// CBM state update unit.
//  * Z unit: on every scheduled event (acc_en) Z gains or loses one weight,
//    W^CBM when the event is a flipped CBM neuron, W^IN when it is a flipped
//    input pulse (the latter only if this neuron is RC-assigned). acc_add is
//    the ADD/SUB control: add when the source became 1, subtract when it
//    became 0. Z therefore always equals
//      sum_j W^IN_ij I_j,t + sum_j W^CBM_ij S_j,t-1.
//  * State update: in the upd_x cycle X += dX (from atms_unit); in the upd_s
//    cycle, if X >= T_CBM, S flips and X restarts from 0.
// The restart of X at 0 and the two's complement weight coding are this
// design's choices; the event-driven Z and the X/S rule follow the paper.
module cbm_pe
  import cbm_pkg::*;
#(
  parameter int ZW = Z_BITS,
  parameter int XW = X_BITS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,      // Z, X <= 0
  input  logic                     s_we,       // load initial S
  input  logic                     s_wdata,
  input  logic                     is_rc,
  input  logic                     acc_en,
  input  logic                     acc_add,
  input  logic                     acc_is_in,
  input  logic signed [W_IN_BITS-1:0]  w_in,
  input  logic signed [W_CBM_BITS-1:0] w_cbm,
  input  logic                     upd_x,
  input  logic                     upd_s,
  input  logic [LOG2T0_BITS-1:0]   log2_t0,
  input  logic [ALPHA_BITS-1:0]    alpha,
  output logic                     s,
  output logic signed [ZW-1:0]     z,
  output logic [XW-1:0]            x,
  output logic                     flip_det
);

  logic [XW-1:0]         dx;
  logic signed [ZW-1:0]  w_sel;
  logic                  use_ev;

  atms_unit #(.ZW(ZW), .XW(XW)) u_atms (
    .z(z), .s(s), .log2_t0(log2_t0), .alpha(alpha), .dx(dx), .flip_det(flip_det)
  );

  always_comb begin
    w_sel  = acc_is_in ? ZW'(w_in) : ZW'(w_cbm);
    use_ev = acc_en && (!acc_is_in || is_rc);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      z <= '0;
      x <= '0;
      s <= 1'b0;
    end else if (clear) begin
      z <= '0;
      x <= '0;
      s <= 1'b0;
    end else begin
      if (use_ev) z <= acc_add ? z + w_sel : z - w_sel;
      if (upd_x)  x <= x + dx;
      if (upd_s && x >= XW'(T_CBM)) begin
        x <= '0;
        s <= !s;
      end
      if (s_we)   s <= s_wdata;
    end
  end

endmodule
