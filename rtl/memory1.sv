// memory1: the CBM-side weight memory, W^CBM and W^IN.
//
// Read side: the scheduler's index i selects one whole row per cycle. For a
// CBM neuron i (< N_CBM) the row holds W^CBM_j,i for every neuron j (2 bits
// each); for an input neuron (>= N_CBM) it holds W^IN_j,(i-N_CBM) (8 bits
// each). The read is registered: the row and the event's tags (add, is_in,
// valid) appear one clock after rd_en, which is the Memory1 stage of the
// pipeline (scheduler -> Memory1 -> CBM Z).
// Write side: the host writes one HOST_DW-bit word of a row per cycle;
// word w covers bits [w*HOST_DW +: HOST_DW] of the row, i.e. neurons
// w*32 .. w*32+31 of a W^CBM row and w*8 .. w*8+7 of a W^IN row.
// On silicon these are SRAM macros (2.1 Mb and 0.13 Mb); here they are plain
// arrays, and the word-wide write port is this design's own choice.
module memory1
  import cbm_pkg::*;
#(
  parameter int N_CBM = N_CBM_D,
  parameter int N_IN  = N_IN_D,
  parameter int DW    = HOST_DW,
  localparam int IW   = $clog2(N_CBM + N_IN),
  localparam int RW   = $clog2(N_CBM),
  localparam int CBM_ROW = N_CBM * W_CBM_BITS,
  localparam int IN_ROW  = N_CBM * W_IN_BITS
) (
  input  logic                 clk,
  // host write
  input  logic                 we_cbm,
  input  logic                 we_in,
  input  logic [11:0]          wrow,
  input  logic [7:0]           wword,
  input  logic [DW-1:0]        wdata,
  // scheduled read
  input  logic                 rd_en,
  input  logic [IW-1:0]        rd_idx,
  input  logic                 rd_add,
  output logic                 q_valid,
  output logic                 q_add,
  output logic                 q_is_in,
  output logic [CBM_ROW-1:0]   q_w_cbm,
  output logic [IN_ROW-1:0]    q_w_in
);

  logic [CBM_ROW-1:0] wcbm_mem [N_CBM];
  logic [IN_ROW-1:0]  win_mem  [N_IN];

  logic is_in_rd;
  assign is_in_rd = rd_idx >= IW'(N_CBM);

  always_ff @(posedge clk) begin
    if (we_cbm) wcbm_mem[wrow[RW-1:0]][wword*DW +: DW] <= wdata;
    if (we_in)  win_mem[wrow[$clog2(N_IN)-1:0]][wword*DW +: DW] <= wdata;
  end

  always_ff @(posedge clk) begin
    q_valid <= rd_en;
    q_add   <= rd_add;
    q_is_in <= is_in_rd;
    if (rd_en && !is_in_rd) q_w_cbm <= wcbm_mem[rd_idx[RW-1:0]];
    if (rd_en &&  is_in_rd) q_w_in  <= win_mem[$clog2(N_IN)'(rd_idx - IW'(N_CBM))];
  end

  initial begin
    assert ((CBM_ROW % DW) == 0 && (IN_ROW % DW) == 0)
      else $error("memory1: rows must be whole host words (N_CBM multiple of 32)");
  end

endmodule
