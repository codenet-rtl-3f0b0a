// conv1x1_engine: pointwise (1x1) convolution with quantization.
//
// The engine is a 16 x 16 array of multiply-accumulate units.  In each round
// (one clock cycle) it takes the 16 input channels of one input group,
// broadcasts input i to the 16 MACs of column i, and gives every MAC its own
// 4-bit weight from a 16x16 weight tile.  Sixteen reduction trees of 16
// products give 16 partial sums, which are added into 16 output registers.
// When all input groups of a pixel have been summed, the output registers go
// through the quantization unit into the output FIFO and start again from
// zero.  This is the paper's description of the 1x1 engine.
//
// Schedule (this design's own): the in_groups words of a pixel are collected
// in one of two pixel banks (one word per cycle from in_*) while the pixel
// in the other bank is computed: out_groups x in_groups rounds, output group
// outer, input group inner, one round per cycle as long as the output FIFO
// has room.  So with out_groups >= 2 the array is busy every cycle the input
// keeps up.  Weight tiles are read from the 1x1 weight buffer at consecutive
// addresses, 0 for the first round of every pixel.  Pipeline: round issued
// in cycle t (weight and pixel-bank read), MAC and accumulation in t+1
// (quant parameter read), quantized word written to the output FIFO in t+2.
//
// Interface: start (one cycle, cfg stable during the layer) begins a layer of
// cfg.height x cfg.width pixels; done pulses for one cycle after the last
// output word has entered the output FIFO.  Input and output are NHWC streams
// of 16-channel words with valid/ready.
module conv1x1_engine
  import codenet_pkg::*;
#(
  parameter int IG_MAX   = 64,    // largest number of input groups
  parameter int W1_DEPTH = 1024,  // 1x1 weight buffer words
  parameter int Q_DEPTH  = 64,
  parameter int OFIFO    = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  layer_cfg_t                   cfg,
  output logic                         done,
  // input pixels
  input  logic                         in_valid,
  output logic                         in_ready,
  input  act_vec_t                     in_data,
  // weight buffer port
  output logic                         w_rd_en,
  output logic [$clog2(W1_DEPTH)-1:0]  w_rd_addr,
  input  w1_tile_t                     w_rd_data,
  // quant parameter port
  output logic                         q_rd_en,
  output logic [$clog2(Q_DEPTH)-1:0]   q_rd_addr,
  input  qparam_vec_t                  q_rd_data,
  // outputs
  output logic                         out_valid,
  input  logic                         out_ready,
  output act_vec_t                     out_data
);
  localparam int IGW = $clog2(IG_MAX);

  // two pixel banks: one is loaded from in_* while the other is computed
  act_vec_t          pixbuf [2][IG_MAX];
  logic [1:0]        full;            // bank holds a complete pixel
  logic              lbank, cbank;    // bank being loaded / computed
  logic [IGW:0]      ld_cnt;          // words of the loading pixel so far
  logic [19:0]       ld_left;         // pixels still to load
  logic [19:0]       pix_left;        // pixels still to compute
  logic [6:0]        ig, og;          // round counters
  logic [$clog2(W1_DEPTH)-1:0] waddr;

  // output FIFO
  logic     fifo_wr, fifo_af;
  act_vec_t fifo_wdata;

  // stage 1 (MAC) registers
  logic      s1_valid, s1_first, s1_last, s1_final;
  logic [5:0] s1_og;
  act_vec_t  s1_x;
  sum_vec_t  acc;
  // stage 2 (quantize) registers
  logic      s2_valid;
  sum_vec_t  s2_sum;
  logic      s2_final;

  logic issue, issue_last_round, pixel_done, load_word, load_last;
  assign issue_last_round = (ig == cfg.in_groups - 1'b1);
  // a round that completes an output group may only start when the FIFO can
  // take the words already in flight plus this one
  assign issue      = full[cbank] && !(issue_last_round && fifo_af);
  assign pixel_done = issue && issue_last_round && (og == cfg.out_groups - 1'b1);

  assign in_ready  = (ld_left != '0) && !full[lbank];
  assign load_word = in_valid && in_ready;
  assign load_last = load_word && (ld_cnt + 1'b1 == (IGW+1)'(cfg.in_groups));
  assign w_rd_en   = issue;
  assign w_rd_addr = waddr;

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      full     <= '0;
      lbank    <= 1'b0;
      cbank    <= 1'b0;
      ld_cnt   <= '0;
      ld_left  <= '0;
      pix_left <= '0;
      ig       <= '0;
      og       <= '0;
      waddr    <= '0;
    end else if (start) begin
      full     <= '0;
      lbank    <= 1'b0;
      cbank    <= 1'b0;
      ld_cnt   <= '0;
      ld_left  <= 20'(cfg.height * cfg.width);
      pix_left <= 20'(cfg.height * cfg.width);
      ig       <= '0;
      og       <= '0;
      waddr    <= '0;
    end else begin
      // loader
      if (load_word) begin
        ld_cnt <= ld_cnt + 1'b1;
        if (load_last) begin
          ld_cnt  <= '0;
          lbank   <= ~lbank;
          ld_left <= ld_left - 1'b1;
        end
      end
      // rounds: output group outer, input group inner
      if (issue) begin
        waddr <= waddr + 1'b1;
        if (issue_last_round) begin
          ig <= '0;
          if (og == cfg.out_groups - 1'b1) begin
            og       <= '0;
            waddr    <= '0;
            cbank    <= ~cbank;
            pix_left <= pix_left - 1'b1;
          end else begin
            og <= og + 1'b1;
          end
        end else begin
          ig <= ig + 1'b1;
        end
      end
      // a bank is filled by the loader and released by the last round
      for (int bk = 0; bk < 2; bk++) begin
        if (load_last && lbank == bk[0]) full[bk] <= 1'b1;
        if (pixel_done && cbank == bk[0]) full[bk] <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (load_word) pixbuf[lbank][ld_cnt[IGW-1:0]] <= in_data;
  end

  // ------------------------------------------------------ stage 1: 16x16 MAC
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
    end else begin
      s1_valid <= issue;
    end
    s1_first <= (ig == '0);
    s1_last  <= issue_last_round;
    s1_final <= pixel_done && (pix_left == 20'd1);
    s1_og    <= og[5:0];
    s1_x     <= pixbuf[cbank][ig[IGW-1:0]];
  end

  // 16 reduction trees, one per output lane
  sum_vec_t tree;
  always_comb begin
    for (int o = 0; o < LANES; o++) begin
      sum_t s;
      s = '0;
      for (int i = 0; i < LANES; i++)
        s = s + SUM_W'(s1_x[i] * w_rd_data[o][i]);
      tree[o] = s;
    end
  end

  sum_vec_t acc_next;
  always_comb begin
    for (int o = 0; o < LANES; o++)
      acc_next[o] = (s1_first ? sum_t'(0) : acc[o]) + tree[o];
  end

  assign q_rd_en   = s1_valid && s1_last;
  assign q_rd_addr = s1_og[$clog2(Q_DEPTH)-1:0];

  always_ff @(posedge clk) begin
    if (s1_valid) acc <= acc_next;
    s2_sum <= acc_next;
    if (!rst_n) begin
      s2_valid <= 1'b0;
      s2_final <= 1'b0;
    end else begin
      s2_valid <= s1_valid && s1_last;
      s2_final <= s1_valid && s1_final;
    end
  end

  // ------------------------------------------------- stage 2: quantization
  quant_unit u_quant (
    .sum  (s2_sum),
    .qp   (q_rd_data),
    .shift(cfg.shift_1x1),
    .relu (cfg.relu_1x1),
    .q    (fifo_wdata)
  );
  assign fifo_wr = s2_valid;
  assign done    = s2_final;

  logic fifo_wr_ready;
  stream_fifo #(.WIDTH(WORD_W), .DEPTH(OFIFO), .AF_MARGIN(4)) u_ofifo (
    .clk        (clk),
    .rst_n      (rst_n),
    .wr_valid   (fifo_wr),
    .wr_ready   (fifo_wr_ready),
    .wr_data    (fifo_wdata),
    .rd_valid   (out_valid),
    .rd_ready   (out_ready),
    .rd_data    (out_data),
    .count      (),
    .almost_full(fifo_af)
  );

  a_no_drop: assert property (@(posedge clk) disable iff (!rst_n)
                              fifo_wr |-> fifo_wr_ready)
    else $error("conv1x1_engine: output FIFO overflow");

endmodule
