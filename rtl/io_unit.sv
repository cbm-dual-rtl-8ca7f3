// io_unit: host port of the chip.
//
// The host sees a word-wide register/memory port. An address is split into
//   [23:20] region   (cbm_pkg::region_e)
//   [19:8]  row      (weight row, neuron index)
//   [7:0]   word     (HOST_DW-bit word inside the row, or register number)
// Writes are decoded in the same cycle into one of: a parameter register
// write (to the controller), a W^IN / W^CBM / W^OUT row-word write (to
// Memory1/Memory2), a mask word write, or an initial-state word write, which
// sets S of neurons word*HOST_DW .. word*HOST_DW+HOST_DW-1.
// Reads return, one clock after h_re (h_rvalid):
//   REG_PARAM word 0 : status {busy[63], done[62], stall[61], alpha_sa[37:32], step count[31:0]}
//   REG_SOUT  word w : SA solution, the states of SA-assigned neurons
//                      (RC-assigned neurons read as 0), neurons w*64 ..
//   REG_MASK  word w : the function mask
// The address map and read latency are this design's own; the paper gives
// only the unit's name and the data it moves.
module io_unit
  import cbm_pkg::*;
#(
  parameter int N_CBM = N_CBM_D
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 h_we,
  input  logic                 h_re,
  input  logic [HOST_AW-1:0]   h_addr,
  input  logic [HOST_DW-1:0]   h_wdata,
  output logic [HOST_DW-1:0]   h_rdata,
  output logic                 h_rvalid,
  // decoded writes
  output param_wr_t            pw,
  output logic                 mask_we,
  output logic                 win_we,
  output logic                 wcbm_we,
  output logic                 wout_we,
  output logic [11:0]          wrow,
  output logic [7:0]           wword,
  output logic [HOST_DW-1:0]   wdata,
  output logic [N_CBM-1:0]     s_we,
  output logic [N_CBM-1:0]     s_wdata,
  // read sources
  input  logic [N_CBM-1:0]     s_vec,
  input  logic [N_CBM-1:0]     rc_mask,
  input  logic                 busy,
  input  logic                 done,
  input  logic                 stall,
  input  logic [ALPHA_BITS-1:0] alpha_sa,
  input  logic [31:0]          step_cnt
);

  localparam int NWORDS = (N_CBM + HOST_DW - 1) / HOST_DW;

  region_e region;
  logic [HOST_DW*NWORDS-1:0] sa_pad, mask_pad;

  always_comb begin
    region  = region_e'(h_addr[23:20]);
    wrow    = h_addr[19:8];
    wword   = h_addr[7:0];
    wdata   = h_wdata;
    pw.we   = h_we && region == REG_PARAM;
    pw.num  = h_addr[7:0];
    pw.data = h_wdata;
    mask_we = h_we && region == REG_MASK;
    win_we  = h_we && region == REG_WIN;
    wcbm_we = h_we && region == REG_WCBM;
    wout_we = h_we && region == REG_WOUT;
    for (int n = 0; n < N_CBM; n++) begin
      s_we[n]    = h_we && region == REG_SINIT && int'(h_addr[7:0]) == n / HOST_DW;
      s_wdata[n] = h_wdata[n % HOST_DW];
    end
    sa_pad   = '0;
    mask_pad = '0;
    sa_pad[N_CBM-1:0]   = s_vec & ~rc_mask;
    mask_pad[N_CBM-1:0] = rc_mask;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_rdata  <= '0;
      h_rvalid <= 1'b0;
    end else begin
      h_rvalid <= h_re;
      if (h_re) begin
        h_rdata <= '0;
        unique case (region)
          REG_PARAM: if (h_addr[7:0] == P_CTRL)
                       h_rdata <= {busy, done, stall, 23'd0, alpha_sa, step_cnt};
          REG_SOUT:  if (int'(h_addr[7:0]) < NWORDS) h_rdata <= sa_pad[int'(h_addr[7:0])*HOST_DW +: HOST_DW];
          REG_MASK:  if (int'(h_addr[7:0]) < NWORDS) h_rdata <= mask_pad[int'(h_addr[7:0])*HOST_DW +: HOST_DW];
          default: ;
        endcase
      end
    end
  end

endmodule
