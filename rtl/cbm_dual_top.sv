// cbm_dual_top: CBM-Dual core, a fully connected chaotic Boltzmann machine
// that runs simulated annealing (SA) and reservoir computing (RC) at once.
//
// Blocks and data flow:
//   io_unit            host port: weights, parameters, mask, initial states in;
//                      status and SA solutions out
//   controller         parameters, step sequencing, annealing of alpha
//   input_layer_unit   8-bit samples -> 256-step pulses (RC inputs)
//   scheduler          DDMAC: one flipped neuron index per clock (i for Z,
//                      i' for O)
//   memory1            W^CBM / W^IN row for index i (registered read)
//   cbm_processing_unit N_CBM neurons: Z += / -= weight, X/S update (ATMS)
//   memory2            W^OUT row for index i' (registered read)
//   output_layer_unit  N_OUT output neurons: O += / -= weight
// Pipeline per event: scheduler (k+1) -> Memory1/Memory2 (k+2) -> Z/O
// accumulate (k+3); a step with n flips takes n + 4 clocks.
// Interfaces: host word port (h_*), input sample stream (in_valid/in_ready/
// in_data, one point = N_IN 8-bit values), RC output strobe rc_valid with
// rc_data = {O_N_OUT-1, ..., O_0}, O_BITS each, and run status.
// Input pulses are only scheduled while RC neurons exist, since only RC
// neurons use them.
// The block set, the connections and the pipeline follow the published
// architecture; the host port, the streams at the edge and the split of SA
// read-out (host port) and RC read-out (rc_valid stream) are this design's.
module cbm_dual_top
  import cbm_pkg::*;
#(
  parameter int N_CBM           = N_CBM_D,
  parameter int N_IN            = N_IN_D,
  parameter int N_OUT           = N_OUT_D,
  parameter int STEPS_PER_POINT = STEPS_PER_POINT_D
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     h_we,
  input  logic                     h_re,
  input  logic [HOST_AW-1:0]       h_addr,
  input  logic [HOST_DW-1:0]       h_wdata,
  output logic [HOST_DW-1:0]       h_rdata,
  output logic                     h_rvalid,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [N_IN*IN_BITS-1:0]  in_data,
  output logic                     rc_valid,
  output logic [N_OUT*O_BITS-1:0]  rc_data,
  output logic                     busy,
  output logic                     done
);

  localparam int PW = $clog2(STEPS_PER_POINT);
  localparam int IW = $clog2(N_CBM + N_IN);
  localparam int OW = $clog2(N_CBM);

  param_wr_t               pw;
  logic                    mask_we, win_we, wcbm_we, wout_we;
  logic [11:0]             wrow;
  logic [7:0]              wword;
  logic [HOST_DW-1:0]      wdata;
  logic [N_CBM-1:0]        s_we, s_wdata, s_vec, rc_mask;
  logic                    clear, rc_active, sched_load, sched_busy, upd_x, upd_s;
  logic [LOG2T0_BITS-1:0]  log2_t0;
  logic [ALPHA_BITS-1:0]   alpha_sa, alpha_rc;
  logic [PW-1:0]           phase;
  logic                    consume, in_avail, stall;
  logic [31:0]             step_cnt, anneal_cnt;
  logic [N_IN-1:0]         pulse_raw, pulse_vec;
  // stream i
  logic                    ev_valid, ev_add, ev_is_in;
  logic [IW-1:0]           ev_idx;
  // stream i'
  logic                    oev_valid, oev_add;
  logic [OW-1:0]           oev_idx;
  // Memory1 / Memory2 outputs
  logic                    m1_valid, m1_add, m1_is_in, m2_valid, m2_add;
  logic [N_CBM*W_CBM_BITS-1:0] m1_w_cbm;
  logic [N_CBM*W_IN_BITS-1:0]  m1_w_in;
  logic [N_OUT*W_OUT_BITS-1:0] m2_w;

  io_unit #(.N_CBM(N_CBM)) u_io (
    .clk, .rst_n, .h_we, .h_re, .h_addr, .h_wdata, .h_rdata, .h_rvalid,
    .pw, .mask_we, .win_we, .wcbm_we, .wout_we, .wrow, .wword, .wdata,
    .s_we, .s_wdata, .s_vec, .rc_mask, .busy, .done, .stall, .alpha_sa, .step_cnt
  );

  controller #(.N_CBM(N_CBM), .STEPS_PER_POINT(STEPS_PER_POINT)) u_ctrl (
    .clk, .rst_n, .pw, .mask_we, .mask_word(wword), .mask_wdata(wdata),
    .clear, .rc_mask, .rc_active, .log2_t0, .alpha_sa, .alpha_rc,
    .sched_load, .sched_busy, .upd_x, .upd_s, .phase, .consume, .in_avail,
    .rc_valid, .busy, .done, .stall, .step_cnt, .anneal_cnt
  );

  input_layer_unit #(.N_IN(N_IN), .STEPS_PER_POINT(STEPS_PER_POINT)) u_in (
    .clk, .rst_n, .clear, .in_valid, .in_ready, .in_data, .consume, .phase,
    .avail(in_avail), .pulse_vec(pulse_raw)
  );

  assign pulse_vec = rc_active ? pulse_raw : '0;

  scheduler #(.N_CBM(N_CBM), .N_IN(N_IN)) u_sched (
    .clk, .rst_n, .clear, .load(sched_load), .s_vec, .pulse_vec, .rc_mask,
    .valid(ev_valid), .idx(ev_idx), .add(ev_add), .is_in(ev_is_in),
    .ovalid(oev_valid), .oidx(oev_idx), .oadd(oev_add), .busy(sched_busy)
  );

  memory1 #(.N_CBM(N_CBM), .N_IN(N_IN)) u_mem1 (
    .clk, .we_cbm(wcbm_we), .we_in(win_we), .wrow, .wword, .wdata,
    .rd_en(ev_valid), .rd_idx(ev_idx), .rd_add(ev_add),
    .q_valid(m1_valid), .q_add(m1_add), .q_is_in(m1_is_in), .q_w_cbm(m1_w_cbm), .q_w_in(m1_w_in)
  );

  cbm_processing_unit #(.N_CBM(N_CBM)) u_cbm (
    .clk, .rst_n, .clear, .s_we, .s_wdata, .rc_mask,
    .acc_en(m1_valid), .acc_add(m1_add), .acc_is_in(m1_is_in),
    .w_in_row(m1_w_in), .w_cbm_row(m1_w_cbm), .upd_x, .upd_s,
    .log2_t0, .alpha_sa, .alpha_rc, .s_vec, .flip_det_vec()
  );

  memory2 #(.N_CBM(N_CBM), .N_OUT(N_OUT)) u_mem2 (
    .clk, .we(wout_we), .wrow, .wword, .wdata,
    .rd_en(oev_valid), .rd_idx(oev_idx), .rd_add(oev_add),
    .q_valid(m2_valid), .q_add(m2_add), .q_w(m2_w)
  );

  output_layer_unit #(.N_OUT(N_OUT)) u_out (
    .clk, .rst_n, .clear, .acc_en(m2_valid), .acc_add(m2_add), .w_row(m2_w), .o_vec(rc_data)
  );

  // the is_in tag of an i' event is never set: i' carries CBM neurons only
  a_no_mac_outside_sched: assert property (@(posedge clk) disable iff (!rst_n)
                                          (upd_x || upd_s) |-> !(m1_valid || m2_valid));

endmodule
