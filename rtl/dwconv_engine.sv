// dwconv_engine: 3x3 depthwise convolution, plain or deformable, with
// quantization.
//
// Deformable sampling here is the square-shape form: each output pixel
// (cy, cx) has one offset d, and its nine samples are at (cy + i*d, cx + j*d)
// for i, j in {-1, 0, 1}, like a 3x3 kernel with a per-pixel dilation.  The
// offset arrives as a signed 8-bit number on the off_* stream, one per output
// pixel, and is clipped to [0, 7].  With deformable mode off the engine uses
// d = 1, the ordinary depthwise convolution.  Samples outside the image read
// as zero.  Outputs are produced for cy = 0, s, 2s, ... and cx likewise
// (s = 1 or 2), ceil(H/s) x ceil(W/s) pixels.
//
// The input feature map streams in (NHWC, 16 channels per word, cg words per
// pixel) and is written into the 15-line buffer, row r into line r mod 15.
// The engine starts output row cy only when input rows up to
// min(cy + 7, H - 1) are in the buffer, and the writer never writes a row
// beyond cy + 7, so the 15 rows cy - 7 .. cy + 7 are always resident and
// every input word is read from the stream once.  The three rows of a
// pattern lie in three different lines and are read through the line
// buffer's three ports in parallel.  To also read the three columns in the
// same cycle, the line buffer is kept in three identical banks, one per
// kernel column k (every input word is written to all three); so all nine
// samples of a group of 16 channels arrive together and the 9 x 16 MAC
// array (16 reduction trees of 9 products) completes one group per cycle.
// The quantization unit converts the sums and the word enters the output
// FIFO.
//
// Pipeline of one group: reads of the nine samples and of the 3x3 weights
// issued in cycle t; samples and weights registered in t+1; MAC in t+2 with
// quant parameter read; output FIFO write in t+3.  A new group can start
// every cycle.  A deformable pixel costs one extra cycle to take its offset.
//
// What follows the paper: 16 channel lanes, 9 taps, the 15-line buffer, the
// [0, N = 7] clipping, the square pattern, d = 1 for plain depthwise, three
// parallel ports on different lines, the 9 x 16 MAC rate, quantization at
// the end.  This design's choices: the three banks (the paper states the MAC
// rate but not how the buffer feeds it), the schedule, zero padding, output
// size, one offset per pixel shared by all channels, the row-wise flow
// control and the one-cycle bubble per offset.
//
// Interface: start (one cycle, cfg stable during the layer); done pulses for
// one cycle after the last output word has entered the output FIFO.
module dwconv_engine
  import codenet_pkg::*;
#(
  parameter int ROW_WORDS = 1024,  // line length in 16-channel words
  parameter int WDW_DEPTH = 64,
  parameter int Q_DEPTH   = 64,
  parameter int OFIFO     = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  layer_cfg_t                   cfg,
  output logic                         done,
  // input feature map
  input  logic                         in_valid,
  output logic                         in_ready,
  input  act_vec_t                     in_data,
  // offsets, one per output pixel when cfg.deform_en
  input  logic                         off_valid,
  output logic                         off_ready,
  input  logic signed [7:0]            off_data,
  // weight buffer port
  output logic                         w_rd_en,
  output logic [$clog2(WDW_DEPTH)-1:0] w_rd_addr,
  input  wdw_vec_t                     w_rd_data,
  // quant parameter port
  output logic                         q_rd_en,
  output logic [$clog2(Q_DEPTH)-1:0]   q_rd_addr,
  input  qparam_vec_t                  q_rd_data,
  // outputs
  output logic                         out_valid,
  input  logic                         out_ready,
  output act_vec_t                     out_data
);
  localparam int LW = $clog2(LB_LINES);
  localparam int AW = $clog2(ROW_WORDS);

  logic [6:0] cg;        // channel groups of this layer
  logic [3:0] s;         // stride
  assign cg = cfg.bypass_1x1 ? cfg.in_groups : cfg.out_groups;
  assign s  = cfg.stride2 ? 4'd2 : 4'd1;

  // ------------------------------------------------------------ line buffer
  logic                        lb_wr_en;
  logic [LW-1:0]               lb_wr_line;
  logic [AW-1:0]               lb_wr_addr;
  // bank k serves kernel column k; all three banks hold the same rows
  logic [2:0][2:0]             lb_rd_en;     // [bank k][port p]
  logic [2:0][2:0][LW-1:0]     lb_rd_line;
  logic [2:0][2:0][AW-1:0]     lb_rd_addr;
  logic [2:0][2:0][WORD_W-1:0] lb_rd_data;

  for (genvar bk = 0; bk < 3; bk++) begin : g_bank
    line_buffer #(.LINES(LB_LINES), .ROW_WORDS(ROW_WORDS), .WIDTH(WORD_W), .NPORTS(3)) u_lb (
      .clk    (clk),
      .wr_en  (lb_wr_en),
      .wr_line(lb_wr_line),
      .wr_addr(lb_wr_addr),
      .wr_data(in_data),
      .rd_en  (lb_rd_en[bk]),
      .rd_line(lb_rd_line[bk]),
      .rd_addr(lb_rd_addr[bk]),
      .rd_data(lb_rd_data[bk])
    );
  end

  // ----------------------------------------------------------------- writer
  logic          wr_act;
  logic [10:0]   wy;             // rows completely written so far
  logic [9:0]    wx;
  logic [6:0]    wg;
  logic [AW-1:0] waddr;
  logic [LW-1:0] wline;
  logic [10:0]   cy;             // centre row of the output row being read

  assign in_ready   = wr_act && (wy < 11'(cfg.height)) && (wy <= cy + 11'd7);
  assign lb_wr_en   = in_valid && in_ready;
  assign lb_wr_line = wline;
  assign lb_wr_addr = waddr;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_act <= 1'b0;
      wy     <= '0;
      wx     <= '0;
      wg     <= '0;
      waddr  <= '0;
      wline  <= '0;
    end else if (start) begin
      wr_act <= 1'b1;
      wy     <= '0;
      wx     <= '0;
      wg     <= '0;
      waddr  <= '0;
      wline  <= '0;
    end else if (lb_wr_en) begin
      waddr <= waddr + 1'b1;
      if (wg == cg - 1'b1) begin
        wg <= '0;
        if (wx == cfg.width - 1'b1) begin
          wx    <= '0;
          waddr <= '0;
          wy    <= wy + 1'b1;
          wline <= (int'(wline) == LB_LINES - 1) ? '0 : wline + 1'b1;
          if (wy + 1'b1 == 11'(cfg.height)) wr_act <= 1'b0;
        end else begin
          wx <= wx + 1'b1;
        end
      end else begin
        wg <= wg + 1'b1;
      end
    end
  end

  // ----------------------------------------------------------------- reader
  typedef enum logic [1:0] {R_IDLE, R_WAIT, R_OFF, R_RUN} rstate_e;
  rstate_e rstate;

  logic [10:0]   cx;
  logic [LW-1:0] cline;          // cy mod 15
  logic [6:0]    g;
  logic [2:0]    d;
  logic          fifo_af;
  logic          issue;
  logic          last_group, last_col, last_row;
  logic [10:0]   need_rows;

  assign need_rows  = (cy + 11'd8 < 11'(cfg.height)) ? cy + 11'd8 : 11'(cfg.height);
  assign last_group = (g == cg - 1'b1);
  assign last_col   = (cx + 11'(s) >= 11'(cfg.width));
  assign last_row   = (cy + 11'(s) >= 11'(cfg.height));
  assign issue      = (rstate == R_RUN) && !fifo_af;
  assign off_ready  = (rstate == R_OFF);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rstate <= R_IDLE;
      cy     <= '0;
      cx     <= '0;
      cline  <= '0;
      g      <= '0;
      d      <= 3'd1;
    end else begin
      case (rstate)
        R_IDLE: if (start) begin
          rstate <= R_WAIT;
          cy     <= '0;
          cx     <= '0;
          cline  <= '0;
          g      <= '0;
        end
        R_WAIT: if (wy >= need_rows) begin
          rstate <= cfg.deform_en ? R_OFF : R_RUN;
          d      <= 3'd1;
        end
        R_OFF: if (off_valid) begin
          d      <= clip_offset(off_data);
          rstate <= R_RUN;
        end
        R_RUN: if (issue) begin
          if (last_group) begin
            g <= '0;
            if (last_col) begin
              cx <= '0;
              cy <= cy + 11'(s);
              cline <= (int'(cline) + int'(s) >= LB_LINES) ? LW'(int'(cline) + int'(s) - LB_LINES)
                                                           : cline + LW'(s);
              rstate <= last_row ? R_IDLE : R_WAIT;
            end else begin
              cx     <= cx + 11'(s);
              rstate <= cfg.deform_en ? R_OFF : R_RUN;
            end
          end else begin
            g <= g + 1'b1;
          end
        end
        default: rstate <= R_IDLE;
      endcase
    end
  end

  // sample addresses: bank k, port p reads row cy + (p-1)d, column cx + (k-1)d
  logic [2:0][2:0] pad;          // [k][p]: sample outside the image
  always_comb begin
    for (int kk = 0; kk < 3; kk++) begin
      logic signed [12:0] col;
      logic               col_ok;
      col    = $signed({2'b0, cx}) + ((13'(kk) - 13'sd1) * $signed({10'b0, d}));
      col_ok = (col >= 0) && (col < $signed({3'b0, cfg.width}));
      for (int p = 0; p < 3; p++) begin
        logic signed [12:0] row;
        int                 ln;
        row = $signed({2'b0, cy}) + ((13'(p) - 13'sd1) * $signed({10'b0, d}));
        pad[kk][p] = !(col_ok && row >= 0 && row < $signed({3'b0, cfg.height}));
        ln = int'(cline) + (p - 1) * int'(d);
        if (ln < 0) ln = ln + LB_LINES;
        else if (ln >= LB_LINES) ln = ln - LB_LINES;
        lb_rd_line[kk][p] = LW'(ln);
        lb_rd_addr[kk][p] = AW'(col[9:0] * cg + 10'(g));
        lb_rd_en[kk][p]   = issue && !pad[kk][p];
      end
    end
  end

  assign w_rd_en   = issue;
  assign w_rd_addr = g[$clog2(WDW_DEPTH)-1:0];

  // stage D: capture samples
  logic        d_valid, d_final;
  logic [6:0]  d_g;
  logic [2:0][2:0] d_pad;
  act_vec_t    samp [3][3];      // [row p][column k]
  wdw_vec_t    wv;
  // stage M: MAC
  logic        m_valid, m_final;
  logic [6:0]  m_g;
  // stage Q: quantize
  logic        q_valid, q_final;
  sum_vec_t    q_sum;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      d_valid <= 1'b0;
      m_valid <= 1'b0;
      q_valid <= 1'b0;
      d_final <= 1'b0;
      m_final <= 1'b0;
      q_final <= 1'b0;
    end else begin
      d_valid <= issue;
      d_final <= issue && last_group && last_col && last_row;
      m_valid <= d_valid;
      m_final <= d_final;
      q_valid <= m_valid;
      q_final <= m_final;
    end
    d_g   <= g;
    d_pad <= pad;
    m_g   <= d_g;
    if (d_valid) begin
      for (int kk = 0; kk < 3; kk++)
        for (int p = 0; p < 3; p++)
          samp[p][kk] <= d_pad[kk][p] ? '0 : act_vec_t'(lb_rd_data[kk][p]);
      wv <= w_rd_data;
    end
  end

  // 16 reduction trees of 9 products
  sum_vec_t tree;
  always_comb begin
    for (int c = 0; c < LANES; c++) begin
      sum_t acc;
      acc = '0;
      for (int p = 0; p < 3; p++)
        for (int kk = 0; kk < 3; kk++)
          acc = acc + SUM_W'(samp[p][kk][c] * wv[c][3*p+kk]);
      tree[c] = acc;
    end
  end

  always_ff @(posedge clk) begin
    if (m_valid) q_sum <= tree;
  end

  assign q_rd_en   = m_valid;
  assign q_rd_addr = m_g[$clog2(Q_DEPTH)-1:0];

  act_vec_t fifo_wdata;
  quant_unit u_quant (
    .sum  (q_sum),
    .qp   (q_rd_data),
    .shift(cfg.shift_dw),
    .relu (cfg.relu_dw),
    .q    (fifo_wdata)
  );
  assign done = q_final;

  logic fifo_wr_ready;
  stream_fifo #(.WIDTH(WORD_W), .DEPTH(OFIFO), .AF_MARGIN(4)) u_ofifo (
    .clk        (clk),
    .rst_n      (rst_n),
    .wr_valid   (q_valid),
    .wr_ready   (fifo_wr_ready),
    .wr_data    (fifo_wdata),
    .rd_valid   (out_valid),
    .rd_ready   (out_ready),
    .rd_data    (out_data),
    .count      (),
    .almost_full(fifo_af)
  );

  a_no_drop: assert property (@(posedge clk) disable iff (!rst_n)
                              q_valid |-> fifo_wr_ready)
    else $error("dwconv_engine: output FIFO overflow");
  a_offset_in_buffer: assert property (@(posedge clk) disable iff (!rst_n)
                                       issue |-> int'(d) <= OFF_MAX);

endmodule
