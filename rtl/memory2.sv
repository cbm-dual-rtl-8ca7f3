// memory2: the output weight memory W^OUT.
//
// The scheduler's index i' (a flipped RC neuron) selects row i', which holds
// W^OUT_k,i' for the N_OUT output neurons, 16 bits each (output k in bits
// [k*16 +: 16]). The read is registered, with the add tag and valid travelling
// alongside, forming the Memory2 stage (scheduler -> Memory2 -> output O).
// The host writes HOST_DW-bit words; a row is padded up to whole words
// (10 x 16 = 160 bits -> three 64-bit words, the top 32 bits unused).
// The row size follows the published W^OUT memory (16b x 10 per neuron);
// the chip uses a 0.16 Mb SRAM macro; the write port is this design's choice.
module memory2
  import cbm_pkg::*;
#(
  parameter int N_CBM = N_CBM_D,
  parameter int N_OUT = N_OUT_D,
  parameter int DW    = HOST_DW,
  localparam int RW   = $clog2(N_CBM),
  localparam int ROW  = N_OUT * W_OUT_BITS,
  localparam int ROWP = ((ROW + DW - 1) / DW) * DW
) (
  input  logic             clk,
  input  logic             we,
  input  logic [11:0]      wrow,
  input  logic [7:0]       wword,
  input  logic [DW-1:0]    wdata,
  input  logic             rd_en,
  input  logic [RW-1:0]    rd_idx,
  input  logic             rd_add,
  output logic             q_valid,
  output logic             q_add,
  output logic [ROW-1:0]   q_w
);

  logic [ROWP-1:0] wout_mem [N_CBM];
  logic [ROWP-1:0] rdata;

  always_ff @(posedge clk) begin
    if (we && (int'(wword) < ROWP / DW)) wout_mem[wrow[RW-1:0]][wword*DW +: DW] <= wdata;
  end

  assign rdata = wout_mem[rd_idx];

  always_ff @(posedge clk) begin
    q_valid <= rd_en;
    q_add   <= rd_add;
    if (rd_en) q_w <= rdata[ROW-1:0];
  end

endmodule
