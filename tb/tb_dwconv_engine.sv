// tb_dwconv_engine: runs small depthwise layers through the 3x3 engine -
// plain (d = 1), deformable with random offsets (including negative ones and
// ones above 7, which must be clipped), stride 1 and stride 2, images taller
// than the 15 buffered lines - and compares every output word with the
// reference model.  Inputs, offsets and outputs see random gaps and
// back-pressure.  A last layer at full speed checks the rate: one cycle per
// group of 16 channels while computing, plus the writes of input rows
// that cannot overlap computation (the buffer has no spare line).
module tb_dwconv_engine;
  import codenet_pkg::*;
  import codenet_ref_pkg::*;
  localparam int RW = 64, WDD = 8, QD = 8;
  logic clk = 0, rst_n = 0;
  logic start, done;
  layer_cfg_t cfg;
  logic in_valid, in_ready, out_valid, out_ready, off_valid, off_ready;
  logic signed [7:0] off_data;
  act_vec_t in_data, out_data;
  logic w_rd_en, q_rd_en;
  logic [$clog2(WDD)-1:0] w_rd_addr;
  logic [$clog2(QD)-1:0]  q_rd_addr;
  wdw_vec_t w_rd_data;
  qparam_vec_t q_rd_data;
  logic prm_wr_en; buf_sel_e prm_wr_sel; logic [11:0] prm_wr_addr; logic [PRM_W-1:0] prm_wr_data;
  int checks = 0, failures = 0;

  dwconv_engine #(.ROW_WORDS(RW), .WDW_DEPTH(WDD), .Q_DEPTH(QD), .OFIFO(8)) dut (
    .clk, .rst_n, .start, .cfg, .done, .in_valid, .in_ready, .in_data,
    .off_valid, .off_ready, .off_data,
    .w_rd_en, .w_rd_addr, .w_rd_data, .q_rd_en, .q_rd_addr, .q_rd_data,
    .out_valid, .out_ready, .out_data);

  param_buffers #(.W1_DEPTH(8), .WDW_DEPTH(WDD), .Q_DEPTH(QD)) bufs (
    .clk, .wr_en(prm_wr_en), .wr_sel(prm_wr_sel), .wr_addr(prm_wr_addr), .wr_data(prm_wr_data),
    .w1_rd_en(1'b0), .w1_rd_addr('0), .w1_rd_data(),
    .wdw_rd_en(w_rd_en), .wdw_rd_addr(w_rd_addr), .wdw_rd_data(w_rd_data),
    .q1_rd_en(1'b0), .q1_rd_addr('0), .q1_rd_data(),
    .qdw_rd_en(q_rd_en), .qdw_rd_addr(q_rd_addr), .qdw_rd_data(q_rd_data));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic prm_write(buf_sel_e sel, int addr, logic [PRM_W-1:0] data);
    @(negedge clk);
    prm_wr_en = 1; prm_wr_sel = sel; prm_wr_addr = 12'(addr); prm_wr_data = data;
    @(negedge clk);
    prm_wr_en = 0;
  endtask

  task automatic run_layer(int h, int w, int cg, int stride, bit deform, int shift, bit relu,
                           bit stress, output int cycles, output int ngroups);
    int c = cg * 16, ho, wo, n_out = 0;
    time t0;
    int in_fm[], wt[], offs[], sums[], scale[], bias[];
    int exp_flat[$];
    in_fm = new[h * w * c]; wt = new[c * 9]; scale = new[c]; bias = new[c];
    offs = new[((h + 1) / stride + 1) * ((w + 1) / stride + 1)];
    foreach (in_fm[i]) in_fm[i] = $urandom_range(0, 255) - 128;
    foreach (wt[i])    wt[i]    = $urandom_range(0, 15) - 8;
    foreach (offs[i])  offs[i]  = $urandom_range(0, 13) - 3;
    foreach (scale[i]) scale[i] = $urandom_range(0, 600) - 100;
    foreach (bias[i])  bias[i]  = $urandom_range(0, 40000) - 20000;
    for (int g = 0; g < cg; g++) begin
      logic [PRM_W-1:0] v = '0, q = '0;
      for (int a = 0; a < 16; a++) begin
        for (int t = 0; t < 9; t++) v[(a*9 + t)*4 +: 4] = 4'(wt[(g*16 + a)*9 + t]);
        q[a*48 +: 48] = {32'(bias[g*16 + a]), 16'(scale[g*16 + a])};
      end
      prm_write(BUF_WDW, g, v);
      prm_write(BUF_QDW, g, q);
    end
    dwconv(in_fm, wt, offs, h, w, c, stride, deform, sums, ho, wo);
    for (int p = 0; p < ho * wo; p++)
      for (int ch = 0; ch < c; ch++)
        exp_flat.push_back(quant(sums[p*c + ch], scale[ch], bias[ch], shift, relu));
    ngroups = ho * wo * cg;
    cfg = '0;
    cfg.height = 10'(h); cfg.width = 10'(w); cfg.out_groups = 7'(cg); cfg.stride2 = (stride == 2);
    cfg.deform_en = deform; cfg.relu_dw = relu; cfg.shift_dw = 5'(shift);
    @(negedge clk);
    start = 1;
    t0 = $time;
    @(negedge clk);
    start = 0;
    fork
      begin : feed
        for (int p = 0; p < h * w; p++)
          for (int g = 0; g < cg; g++) begin
            in_valid = 1;
            for (int b = 0; b < 16; b++) in_data[b] = 8'(in_fm[p*c + g*16 + b]);
            #1;
            while (!in_ready) @(negedge clk);
            @(negedge clk);
            in_valid = 0;
            if (stress && $urandom_range(0, 3) == 0) @(negedge clk);
          end
      end
      begin : feed_offsets
        if (deform)
          for (int p = 0; p < ho * wo; p++) begin
            off_valid = 1;
            off_data = 8'(offs[p]);
            #1;
            while (!off_ready) @(negedge clk);
            @(negedge clk);
            off_valid = 0;
            if (stress && $urandom_range(0, 2) == 0) @(negedge clk);
          end
      end
      begin : drain
        while (n_out < ho * wo * cg) begin
          @(negedge clk);
          out_ready = stress ? ($urandom_range(0, 2) != 0) : 1'b1;
          #1;
          if (out_valid && out_ready) begin
            for (int a = 0; a < 16; a++)
              check(int'(out_data[a]) == exp_flat[n_out*16 + a],
                    $sformatf("h%0d w%0d s%0d def%0d: word %0d lane %0d: got %0d want %0d", h, w, stride, deform,
                              n_out, a, int'(out_data[a]), exp_flat[n_out*16 + a]));
            n_out++;
          end
        end
      end
      begin : wait_done
        while (!done) @(posedge clk);
        cycles = int'(($time - t0) / 10);
      end
    join
    @(negedge clk);
    out_ready = 0;
    check(!out_valid, "no extra output");
  endtask

  int cyc, ng;
  initial begin
    start = 0; in_valid = 0; in_data = '0; out_ready = 0; cfg = '0; off_valid = 0; off_data = 0;
    prm_wr_en = 0; prm_wr_sel = BUF_W1; prm_wr_addr = 0; prm_wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_layer(9, 5, 2, 1, 1'b0, 3, 1'b1, 1'b1, cyc, ng);   // plain depthwise
    run_layer(20, 4, 1, 1, 1'b1, 4, 1'b0, 1'b1, cyc, ng);  // deformable, > 15 rows
    run_layer(17, 7, 2, 2, 1'b1, 5, 1'b1, 1'b1, cyc, ng);  // deformable, stride 2
    run_layer(6, 3, 1, 2, 1'b0, 0, 1'b0, 1'b1, cyc, ng);   // plain, stride 2
    run_layer(3, 2, 3, 1, 1'b1, 2, 1'b1, 1'b1, cyc, ng);   // tiny image, all padding
    // full speed, plain: one cycle per group computing, one per word written
    run_layer(16, 8, 2, 1, 1'b0, 4, 1'b1, 1'b0, cyc, ng);
    $display("full-speed layer: %0d cycles for %0d groups", cyc, ng);
    check(cyc >= ng && cyc <= 2 * ng + 16 * 8 + 40, $sformatf("cycle count %0d", cyc));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
