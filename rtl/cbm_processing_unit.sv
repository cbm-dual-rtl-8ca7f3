// cbm_processing_unit: the array of N_CBM fully connected CBM neurons.
//
// All neurons receive the same weight row per cycle: row i of W^CBM (one
// 2-bit weight per neuron) when the scheduled event is CBM neuron i, or row i
// of W^IN (one 8-bit weight per neuron) when it is input neuron i. Each
// neuron adds or subtracts its own weight, so one event costs one clock for
// the whole array. The X and S updates of all neurons happen together in the
// upd_x and upd_s cycles.
// Each neuron takes alpha_sa when it is SA-assigned (mask bit 0) and
// alpha_rc when RC-assigned (mask bit 1): annealing acts on SA neurons only,
// which is this design's reading of the per-neuron function mask.
// Weight row layout: neuron n uses bits [n*W +: W] of the row.
module cbm_processing_unit
  import cbm_pkg::*;
#(
  parameter int N_CBM = N_CBM_D
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  input  logic [N_CBM-1:0]              s_we,
  input  logic [N_CBM-1:0]              s_wdata,
  input  logic [N_CBM-1:0]              rc_mask,
  input  logic                          acc_en,
  input  logic                          acc_add,
  input  logic                          acc_is_in,
  input  logic [N_CBM*W_IN_BITS-1:0]    w_in_row,
  input  logic [N_CBM*W_CBM_BITS-1:0]   w_cbm_row,
  input  logic                          upd_x,
  input  logic                          upd_s,
  input  logic [LOG2T0_BITS-1:0]        log2_t0,
  input  logic [ALPHA_BITS-1:0]         alpha_sa,
  input  logic [ALPHA_BITS-1:0]         alpha_rc,
  output logic [N_CBM-1:0]              s_vec,
  output logic [N_CBM-1:0]              flip_det_vec
);

  for (genvar n = 0; n < N_CBM; n++) begin : g_pe
    logic signed [Z_BITS-1:0] z_n;
    logic [X_BITS-1:0]        x_n;
    cbm_pe u_pe (
      .clk      (clk),
      .rst_n    (rst_n),
      .clear    (clear),
      .s_we     (s_we[n]),
      .s_wdata  (s_wdata[n]),
      .is_rc    (rc_mask[n]),
      .acc_en   (acc_en),
      .acc_add  (acc_add),
      .acc_is_in(acc_is_in),
      .w_in     (w_in_row[n*W_IN_BITS +: W_IN_BITS]),
      .w_cbm    (w_cbm_row[n*W_CBM_BITS +: W_CBM_BITS]),
      .upd_x    (upd_x),
      .upd_s    (upd_s),
      .log2_t0  (log2_t0),
      .alpha    (rc_mask[n] ? alpha_rc : alpha_sa),
      .s        (s_vec[n]),
      .z        (z_n),
      .x        (x_n),
      .flip_det (flip_det_vec[n])
    );
  end

endmodule
