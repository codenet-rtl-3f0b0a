// codenet_accel: the CoDeNet dataflow accelerator (programmable-logic side).
//
// One run executes one layer pair of the network as a dataflow pipeline:
//
//   in_*  -> Inputs FIFO -> 1x1 conv + quant -> FIFO -> 3x3 depthwise
//   (deformable) conv + quant -> Outputs FIFO -> out_*
//   off_* -> Offsets FIFO -> 3x3 engine
//
// Each engine starts working as soon as data reaches it; they are coupled
// only through the FIFOs.  Either engine can be bypassed (cfg.bypass_1x1,
// cfg.bypass_dw): its input stream is then routed around it.  All weights
// and the per-channel scale/bias pairs are preloaded into the on-chip
// parameter buffers through the prm_wr_* port before a run.
//
// The DMA that moves data between DRAM and the accelerator is not part of
// this design: its streams are this module's in_*, off_* and out_* ports and
// its parameter writes the prm_wr_* port.  All streams are NHWC, one word =
// one pixel's group of 16 channels, 8 bits each; offsets are signed 8-bit,
// one per output pixel of the 3x3 engine.
//
// Control: assert start for one cycle with cfg valid; cfg is captured and
// busy stays high until the last output word has been accepted on out_*,
// when done pulses for one cycle.  The engine order, the FIFOs, the bypass
// signals and the preloaded buffers follow the paper; the start/busy/done
// protocol and the configuration record are this design's own.
module codenet_accel
  import codenet_pkg::*;
#(
  parameter int FIFO_DEPTH = 16,
  parameter int W1_DEPTH   = 1024,
  parameter int WDW_DEPTH  = 64,
  parameter int Q_DEPTH    = 64,
  parameter int IG_MAX     = 64,
  parameter int ROW_WORDS  = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  // control
  input  logic              start,
  input  layer_cfg_t        cfg,
  output logic              busy,
  output logic              done,
  // parameter load (from the DMA)
  input  logic              prm_wr_en,
  input  buf_sel_e          prm_wr_sel,
  input  logic [11:0]       prm_wr_addr,
  input  logic [PRM_W-1:0]  prm_wr_data,
  // input feature map (from the DMA)
  input  logic              in_valid,
  output logic              in_ready,
  input  act_vec_t          in_data,
  // deformable offsets (from the DMA)
  input  logic              off_valid,
  output logic              off_ready,
  input  logic signed [7:0] off_data,
  // output feature map (to the DMA)
  output logic              out_valid,
  input  logic              out_ready,
  output act_vec_t          out_data
);
  layer_cfg_t  cfg_q;
  logic        run_start;        // start, one cycle after cfg is captured
  logic [31:0] out_left;

  // expected number of output words of a run
  function automatic logic [31:0] out_words(input layer_cfg_t c);
    logic [31:0] ho, wo, g;
    g  = 32'(c.bypass_1x1 ? c.in_groups : c.out_groups);
    ho = c.bypass_dw ? 32'(c.height) : (c.stride2 ? (32'(c.height) + 32'd1) >> 1 : 32'(c.height));
    wo = c.bypass_dw ? 32'(c.width)  : (c.stride2 ? (32'(c.width) + 32'd1) >> 1 : 32'(c.width));
    return ho * wo * g;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      run_start <= 1'b0;
      out_left  <= '0;
    end else begin
      done      <= 1'b0;
      run_start <= 1'b0;
      if (start && !busy) begin
        cfg_q     <= cfg;
        busy      <= 1'b1;
        run_start <= 1'b1;
        out_left  <= out_words(cfg);
      end else if (busy && out_valid && out_ready) begin
        out_left <= out_left - 1'b1;
        if (out_left == 32'd1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // ---------------------------------------------------------- parameter buffers
  logic                         w1_rd_en, wdw_rd_en, q1_rd_en, qdw_rd_en;
  logic [$clog2(W1_DEPTH)-1:0]  w1_rd_addr;
  logic [$clog2(WDW_DEPTH)-1:0] wdw_rd_addr;
  logic [$clog2(Q_DEPTH)-1:0]   q1_rd_addr, qdw_rd_addr;
  w1_tile_t                     w1_rd_data;
  wdw_vec_t                     wdw_rd_data;
  qparam_vec_t                  q1_rd_data, qdw_rd_data;

  param_buffers #(.W1_DEPTH(W1_DEPTH), .WDW_DEPTH(WDW_DEPTH), .Q_DEPTH(Q_DEPTH)) u_buffers (
    .clk        (clk),
    .wr_en      (prm_wr_en),
    .wr_sel     (prm_wr_sel),
    .wr_addr    (prm_wr_addr),
    .wr_data    (prm_wr_data),
    .w1_rd_en   (w1_rd_en),
    .w1_rd_addr (w1_rd_addr),
    .w1_rd_data (w1_rd_data),
    .wdw_rd_en  (wdw_rd_en),
    .wdw_rd_addr(wdw_rd_addr),
    .wdw_rd_data(wdw_rd_data),
    .q1_rd_en   (q1_rd_en),
    .q1_rd_addr (q1_rd_addr),
    .q1_rd_data (q1_rd_data),
    .qdw_rd_en  (qdw_rd_en),
    .qdw_rd_addr(qdw_rd_addr),
    .qdw_rd_data(qdw_rd_data)
  );

  // ------------------------------------------------------------- input FIFOs
  logic     src_valid, src_ready;
  act_vec_t src_data;
  stream_fifo #(.WIDTH(WORD_W), .DEPTH(FIFO_DEPTH)) u_inputs (
    .clk(clk), .rst_n(rst_n),
    .wr_valid(in_valid), .wr_ready(in_ready), .wr_data(in_data),
    .rd_valid(src_valid), .rd_ready(src_ready), .rd_data(src_data),
    .count(), .almost_full()
  );

  logic              ofs_valid, ofs_ready;
  logic signed [7:0] ofs_data;
  stream_fifo #(.WIDTH(8), .DEPTH(FIFO_DEPTH)) u_offsets (
    .clk(clk), .rst_n(rst_n),
    .wr_valid(off_valid), .wr_ready(off_ready), .wr_data(off_data),
    .rd_valid(ofs_valid), .rd_ready(ofs_ready), .rd_data(ofs_data),
    .count(), .almost_full()
  );

  // ------------------------------------------------------------- 1x1 engine
  logic     c1_in_valid, c1_in_ready, c1_out_valid, c1_out_ready, c1_done;
  act_vec_t c1_out_data;
  logic     c1_start, dw_start;

  assign c1_start    = run_start && !cfg_q.bypass_1x1;
  assign dw_start    = run_start && !cfg_q.bypass_dw;
  assign c1_in_valid = src_valid && !cfg_q.bypass_1x1;

  conv1x1_engine #(.IG_MAX(IG_MAX), .W1_DEPTH(W1_DEPTH), .Q_DEPTH(Q_DEPTH)) u_conv1x1 (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (c1_start),
    .cfg      (cfg_q),
    .done     (c1_done),
    .in_valid (c1_in_valid),
    .in_ready (c1_in_ready),
    .in_data  (src_data),
    .w_rd_en  (w1_rd_en),
    .w_rd_addr(w1_rd_addr),
    .w_rd_data(w1_rd_data),
    .q_rd_en  (q1_rd_en),
    .q_rd_addr(q1_rd_addr),
    .q_rd_data(q1_rd_data),
    .out_valid(c1_out_valid),
    .out_ready(c1_out_ready),
    .out_data (c1_out_data)
  );

  // stream after the first stage: the 1x1 result, or the input when bypassed
  logic     mid_valid, mid_ready;
  act_vec_t mid_data;
  assign mid_valid    = cfg_q.bypass_1x1 ? src_valid : c1_out_valid;
  assign mid_data     = cfg_q.bypass_1x1 ? src_data  : c1_out_data;
  assign src_ready    = cfg_q.bypass_1x1 ? mid_ready : c1_in_ready;
  assign c1_out_ready = !cfg_q.bypass_1x1 && mid_ready;

  // ------------------------------------------------------------- link FIFO
  logic     lk_valid, lk_ready;
  act_vec_t lk_data;
  stream_fifo #(.WIDTH(WORD_W), .DEPTH(FIFO_DEPTH)) u_link (
    .clk(clk), .rst_n(rst_n),
    .wr_valid(mid_valid), .wr_ready(mid_ready), .wr_data(mid_data),
    .rd_valid(lk_valid), .rd_ready(lk_ready), .rd_data(lk_data),
    .count(), .almost_full()
  );

  // ------------------------------------------------------------- 3x3 engine
  logic     dw_in_valid, dw_in_ready, dw_out_valid, dw_out_ready, dw_done;
  act_vec_t dw_out_data;
  assign dw_in_valid = lk_valid && !cfg_q.bypass_dw;

  dwconv_engine #(.ROW_WORDS(ROW_WORDS), .WDW_DEPTH(WDW_DEPTH), .Q_DEPTH(Q_DEPTH)) u_dwconv (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (dw_start),
    .cfg      (cfg_q),
    .done     (dw_done),
    .in_valid (dw_in_valid),
    .in_ready (dw_in_ready),
    .in_data  (lk_data),
    .off_valid(ofs_valid),
    .off_ready(ofs_ready),
    .off_data (ofs_data),
    .w_rd_en  (wdw_rd_en),
    .w_rd_addr(wdw_rd_addr),
    .w_rd_data(wdw_rd_data),
    .q_rd_en  (qdw_rd_en),
    .q_rd_addr(qdw_rd_addr),
    .q_rd_data(qdw_rd_data),
    .out_valid(dw_out_valid),
    .out_ready(dw_out_ready),
    .out_data (dw_out_data)
  );

  // ------------------------------------------------------------ Outputs FIFO
  logic     o_valid, o_ready;
  act_vec_t o_data;
  assign o_valid      = cfg_q.bypass_dw ? lk_valid : dw_out_valid;
  assign o_data       = cfg_q.bypass_dw ? lk_data  : dw_out_data;
  assign lk_ready     = cfg_q.bypass_dw ? o_ready  : dw_in_ready;
  assign dw_out_ready = !cfg_q.bypass_dw && o_ready;

  stream_fifo #(.WIDTH(WORD_W), .DEPTH(FIFO_DEPTH)) u_outputs (
    .clk(clk), .rst_n(rst_n),
    .wr_valid(o_valid), .wr_ready(o_ready), .wr_data(o_data),
    .rd_valid(out_valid), .rd_ready(out_ready), .rd_data(out_data),
    .count(), .almost_full()
  );

  // an engine that is not bypassed finishes before the run does
  a_c1_done_in_run: assert property (@(posedge clk) disable iff (!rst_n) c1_done |-> busy);
  a_dw_done_in_run: assert property (@(posedge clk) disable iff (!rst_n) dw_done |-> busy);

endmodule
