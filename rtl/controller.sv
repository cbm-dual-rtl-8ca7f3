// controller: parameters, step sequencing and temperature annealing.
//
// Registers written by the host (through the I/O unit):
//   log2_t0   T0 = 2^log2_t0, the initial temperature
//   c_t       change rate of T, unsigned Q1.7 (128 = 1.0)
//   an_steps  number of annealing steps per temperature value
//   alpha0    initial alpha (T = T0 / alpha), 6 bits
//   nsteps    number of CBM steps in one run
//   rc_mask   SA/RC function mask, one bit per neuron, 1 = RC-assigned
// Every CBM step runs through LOAD -> SCHED -> UPDX -> UPDS:
//   LOAD  (cycle k)        the scheduler captures the states S_t and pulses
//   SCHED (k+1 .. k+n+1)   n flipped neurons stream through Memory1/2 into Z
//                          and O; the extra cycle lets the last one land
//   UPDX  (k+n+2)          X += dX in every neuron
//   UPDS  (k+n+3)          S flips where X >= T_CBM; S_t+1 is seen at k+n+4
// so a step with n flips takes n + 4 clocks, as in the published timing
// diagram (five flips: S_t at k, S_t+1 at k+9).
// The step counter drives annealing: every an_steps steps the alpha
// register (fixed point, ALPHA_FRAC fraction bits, saturating at 63.99) is
// multiplied by C_T; SA neurons see its integer part, RC neurons keep alpha0.
// When RC neurons exist, each group of STEPS_PER_POINT steps is one data
// point: the first step of a point waits in WAIT_IN until the input layer
// holds a point (an input stall), and after the Z/O accumulation of the last
// step of a point the output layer's O is handed out as the RC solution
// (rc_valid, one clock).
// The register formats, the run/step count interface and the idle/run
// handshake are this design's own choices; the paper lists the parameters.
module controller
  import cbm_pkg::*;
#(
  parameter int N_CBM           = N_CBM_D,
  parameter int STEPS_PER_POINT = STEPS_PER_POINT_D,
  parameter int ALPHA_FRAC      = 10,
  localparam int PW             = $clog2(STEPS_PER_POINT),
  localparam int AW             = ALPHA_BITS + ALPHA_FRAC
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  param_wr_t                pw,
  input  logic                     mask_we,
  input  logic [7:0]               mask_word,
  input  logic [HOST_DW-1:0]       mask_wdata,
  // to the datapath
  output logic                     clear,
  output logic [N_CBM-1:0]         rc_mask,
  output logic                     rc_active,
  output logic [LOG2T0_BITS-1:0]   log2_t0,
  output logic [ALPHA_BITS-1:0]    alpha_sa,
  output logic [ALPHA_BITS-1:0]    alpha_rc,
  output logic                     sched_load,
  input  logic                     sched_busy,
  output logic                     upd_x,
  output logic                     upd_s,
  // input layer
  output logic [PW-1:0]            phase,
  output logic                     consume,
  input  logic                     in_avail,
  // RC solution strobe
  output logic                     rc_valid,
  // status
  output logic                     busy,
  output logic                     done,
  output logic                     stall,
  output logic [31:0]              step_cnt,
  output logic [31:0]              anneal_cnt
);

  typedef enum logic [2:0] {S_IDLE, S_WAIT_IN, S_LOAD, S_SCHED, S_UPDX, S_UPDS} state_e;
  state_e state;

  logic [CT_BITS-1:0]   c_t;
  logic [15:0]          an_steps;
  logic [ALPHA_BITS-1:0] alpha0;
  logic [31:0]          nsteps, steps_left;
  logic [15:0]          an_cnt;
  logic [AW-1:0]        alpha_q;
  logic [AW+CT_BITS-1:0] alpha_prod;
  logic                 start_req, need_input;

  always_comb begin
    clear      = pw.we && pw.num == P_CTRL && pw.data[1];
    start_req  = pw.we && pw.num == P_CTRL && pw.data[0];
    rc_active  = |rc_mask;
    alpha_sa   = alpha_q[AW-1:ALPHA_FRAC];
    alpha_rc   = alpha0;
    need_input = rc_active && phase == '0;
    busy       = state != S_IDLE;
    stall      = state == S_WAIT_IN;
    sched_load = state == S_LOAD;
    consume    = state == S_LOAD && need_input;
    upd_x      = state == S_UPDX;
    upd_s      = state == S_UPDS;
    rc_valid   = state == S_UPDX && rc_active && phase == PW'(STEPS_PER_POINT - 1);
    alpha_prod = alpha_q * c_t;
  end

  // host parameter registers and mask
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      log2_t0  <= '0;
      c_t      <= CT_BITS'(128);
      an_steps <= 16'd1;
      alpha0   <= ALPHA_BITS'(1);
      nsteps   <= '0;
      rc_mask  <= '0;
    end else begin
      if (pw.we) begin
        case (pw.num)
          P_LOG2T0:  log2_t0  <= pw.data[LOG2T0_BITS-1:0];
          P_CT:      c_t      <= pw.data[CT_BITS-1:0];
          P_ANSTEPS: an_steps <= pw.data[15:0];
          P_ALPHA0:  alpha0   <= pw.data[ALPHA_BITS-1:0];
          P_NSTEPS:  nsteps   <= pw.data[31:0];
          default: ;
        endcase
      end
      if (mask_we)
        for (int b = 0; b < HOST_DW; b++)
          if (int'(mask_word) * HOST_DW + b < N_CBM)
            rc_mask[int'(mask_word) * HOST_DW + b] <= mask_wdata[b];
    end
  end

  // step sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      done       <= 1'b0;
      steps_left <= '0;
      step_cnt   <= '0;
      anneal_cnt <= '0;
      phase      <= '0;
      an_cnt     <= '0;
      alpha_q    <= AW'(1) << ALPHA_FRAC;
    end else if (clear) begin
      state      <= S_IDLE;
      done       <= 1'b0;
      steps_left <= '0;
      step_cnt   <= '0;
      anneal_cnt <= '0;
      phase      <= '0;
      an_cnt     <= '0;
      alpha_q    <= AW'(alpha0) << ALPHA_FRAC;
    end else begin
      unique case (state)
        S_IDLE: if (start_req && nsteps != 0) begin
          done       <= 1'b0;
          steps_left <= nsteps;
          state      <= (rc_active && phase == '0 && !in_avail) ? S_WAIT_IN : S_LOAD;
        end
        S_WAIT_IN: if (in_avail) state <= S_LOAD;
        S_LOAD:    state <= S_SCHED;
        S_SCHED:   if (!sched_busy) state <= S_UPDX;
        S_UPDX:    state <= S_UPDS;
        S_UPDS: begin
          step_cnt   <= step_cnt + 1;
          steps_left <= steps_left - 1;
          phase      <= (phase == PW'(STEPS_PER_POINT - 1)) ? '0 : phase + 1'b1;
          if (an_cnt + 1'b1 >= an_steps) begin
            an_cnt     <= '0;
            anneal_cnt <= anneal_cnt + 1;
            if (alpha_prod[AW+CT_BITS-1:7] > (AW+CT_BITS-7)'({AW{1'b1}}))
              alpha_q <= '1;
            else
              alpha_q <= alpha_prod[AW+6:7];
          end else begin
            an_cnt <= an_cnt + 1'b1;
          end
          if (steps_left == 1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else if (rc_active && phase == PW'(STEPS_PER_POINT - 1) && !in_avail) begin
            state <= S_WAIT_IN;
          end else begin
            state <= S_LOAD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_load_not_busy: assert property (@(posedge clk) disable iff (!rst_n) sched_load |-> !sched_busy);

endmodule
