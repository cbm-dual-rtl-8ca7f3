// cbm_pkg: sizes, widths and small helpers shared by the CBM-Dual core.
//
// The neuron counts (16 input, 1024 CBM, 10 output neurons), the weight
// precisions (8-bit W^IN, 2-bit W^CBM, 16-bit W^OUT), the 19-bit Z, the
// time-resolution constant T_CBM = 256 and the 256 steps per input data point
// follow the published chip. The widths of the output accumulator, of the
// internal state X and of the host data word are this design's own choices.
package cbm_pkg;

  localparam int N_IN_D        = 16;
  localparam int N_CBM_D       = 1024;
  localparam int N_OUT_D       = 10;
  localparam int IN_BITS       = 8;    // input data sample width
  localparam int W_IN_BITS     = 8;
  localparam int W_CBM_BITS    = 2;
  localparam int W_OUT_BITS    = 16;
  localparam int Z_BITS        = 19;
  localparam int O_BITS        = 26;   // 16-bit weights summed over 1024 neurons
  localparam int X_BITS        = 10;   // holds T_CBM-1 plus the largest increment 257
  localparam int T_CBM         = 256;
  localparam int STEPS_PER_POINT_D = 256;
  localparam int ALPHA_BITS    = 6;
  localparam int LOG2T0_BITS   = 5;
  localparam int CT_BITS       = 8;    // C_T, unsigned Q1.7
  localparam int HOST_DW       = 64;
  localparam int HOST_AW       = 24;

  // Host address regions (address bits 23:20).
  typedef enum logic [3:0] {
    REG_PARAM = 4'd0,   // parameter / control registers, word = register number
    REG_WIN   = 4'd1,   // W^IN rows
    REG_WCBM  = 4'd2,   // W^CBM rows
    REG_WOUT  = 4'd3,   // W^OUT rows
    REG_MASK  = 4'd4,   // SA/RC function mask, 1 = RC
    REG_SINIT = 4'd5,   // initial external states
    REG_SOUT  = 4'd6    // SA solution read-back
  } region_e;

  // Parameter register numbers inside REG_PARAM.
  typedef enum logic [7:0] {
    P_CTRL     = 8'd0,  // write: bit0 start, bit1 clear; read: status
    P_LOG2T0   = 8'd1,
    P_CT       = 8'd2,
    P_ANSTEPS  = 8'd3,
    P_ALPHA0   = 8'd4,
    P_NSTEPS   = 8'd5
  } param_e;

  // Parameter write strobe carried from the I/O unit to the controller.
  typedef struct packed {
    logic               we;
    logic [7:0]         num;
    logic [HOST_DW-1:0] data;
  } param_wr_t;

endpackage
