// param_buffers: on-chip storage for all weights and quantization parameters.
//
// The network was co-designed so that the weights of every accelerated layer
// fit on chip and are reused for every pixel.  This module holds four
// memories: 1x1 weight tiles (16 output x 16 input channels of 4 bits per
// word), 3x3 depthwise weights (9 taps of 16 channels per word), and the
// per-channel scale/bias pairs of the 1x1 and of the 3x3 quantization units
// (16 pairs per word).  All four are written through one load port: wr_sel
// picks the memory, wr_addr the word, and the low bits of wr_data are the word.
// Each memory has one read port with a registered output: the data of a read
// enabled in cycle t is on rd_data in cycle t+1 and stays there until the next
// enabled read, as in a block RAM.  The three kinds of buffer and their
// preloading follow the paper; the depths, word layouts and the single load
// port are this design's choices.
module param_buffers
  import codenet_pkg::*;
#(
  parameter int W1_DEPTH  = 1024,  // 1x1 weight tiles
  parameter int WDW_DEPTH = 64,    // 3x3 channel groups
  parameter int Q_DEPTH   = 64     // quant parameter groups per engine
) (
  input  logic                         clk,
  // load port
  input  logic                         wr_en,
  input  buf_sel_e                     wr_sel,
  input  logic [11:0]                  wr_addr,
  input  logic [PRM_W-1:0]             wr_data,
  // 1x1 engine weights
  input  logic                         w1_rd_en,
  input  logic [$clog2(W1_DEPTH)-1:0]  w1_rd_addr,
  output w1_tile_t                     w1_rd_data,
  // 3x3 engine weights
  input  logic                         wdw_rd_en,
  input  logic [$clog2(WDW_DEPTH)-1:0] wdw_rd_addr,
  output wdw_vec_t                     wdw_rd_data,
  // quant parameters of the 1x1 engine
  input  logic                         q1_rd_en,
  input  logic [$clog2(Q_DEPTH)-1:0]   q1_rd_addr,
  output qparam_vec_t                  q1_rd_data,
  // quant parameters of the 3x3 engine
  input  logic                         qdw_rd_en,
  input  logic [$clog2(Q_DEPTH)-1:0]   qdw_rd_addr,
  output qparam_vec_t                  qdw_rd_data
);
  logic [W1_W-1:0]  w1_mem  [W1_DEPTH];
  logic [WDW_W-1:0] wdw_mem [WDW_DEPTH];
  logic [QV_W-1:0]  q1_mem  [Q_DEPTH];
  logic [QV_W-1:0]  qdw_mem [Q_DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && wr_sel == BUF_W1)
      w1_mem[wr_addr[$clog2(W1_DEPTH)-1:0]] <= wr_data[W1_W-1:0];
    if (w1_rd_en) w1_rd_data <= w1_mem[w1_rd_addr];
  end

  always_ff @(posedge clk) begin
    if (wr_en && wr_sel == BUF_WDW)
      wdw_mem[wr_addr[$clog2(WDW_DEPTH)-1:0]] <= wr_data[WDW_W-1:0];
    if (wdw_rd_en) wdw_rd_data <= wdw_mem[wdw_rd_addr];
  end

  always_ff @(posedge clk) begin
    if (wr_en && wr_sel == BUF_Q1)
      q1_mem[wr_addr[$clog2(Q_DEPTH)-1:0]] <= wr_data[QV_W-1:0];
    if (q1_rd_en) q1_rd_data <= q1_mem[q1_rd_addr];
  end

  always_ff @(posedge clk) begin
    if (wr_en && wr_sel == BUF_QDW)
      qdw_mem[wr_addr[$clog2(Q_DEPTH)-1:0]] <= wr_data[QV_W-1:0];
    if (qdw_rd_en) qdw_rd_data <= qdw_mem[qdw_rd_addr];
  end

endmodule
