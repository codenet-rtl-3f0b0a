// tb_conv1x1_engine: runs several small 1x1 layers through the engine, with
// weights and quantization parameters preloaded into the parameter buffers,
// and compares every output word with the reference model.  Layers run with
// random input gaps and output back-pressure, and once at full speed, where
// the cycle count must show one 16x16 round per cycle: a pixel with ig input
// and og output groups takes og*ig cycles, its load overlapping the previous
// pixel's rounds, so only the first pixel's load adds to the total.
module tb_conv1x1_engine;
  import codenet_pkg::*;
  import codenet_ref_pkg::*;
  localparam int IGM = 8, W1D = 64, QD = 8;
  logic clk = 0, rst_n = 0;
  logic start, done;
  layer_cfg_t cfg;
  logic in_valid, in_ready, out_valid, out_ready;
  act_vec_t in_data, out_data;
  logic w_rd_en, q_rd_en;
  logic [$clog2(W1D)-1:0] w_rd_addr;
  logic [$clog2(QD)-1:0]  q_rd_addr;
  w1_tile_t w_rd_data;
  qparam_vec_t q_rd_data;
  // parameter loading
  logic prm_wr_en; buf_sel_e prm_wr_sel; logic [11:0] prm_wr_addr; logic [PRM_W-1:0] prm_wr_data;
  int checks = 0, failures = 0;

  conv1x1_engine #(.IG_MAX(IGM), .W1_DEPTH(W1D), .Q_DEPTH(QD), .OFIFO(8)) dut (
    .clk, .rst_n, .start, .cfg, .done, .in_valid, .in_ready, .in_data,
    .w_rd_en, .w_rd_addr, .w_rd_data, .q_rd_en, .q_rd_addr, .q_rd_data,
    .out_valid, .out_ready, .out_data);

  param_buffers #(.W1_DEPTH(W1D), .WDW_DEPTH(8), .Q_DEPTH(QD)) bufs (
    .clk, .wr_en(prm_wr_en), .wr_sel(prm_wr_sel), .wr_addr(prm_wr_addr), .wr_data(prm_wr_data),
    .w1_rd_en(w_rd_en), .w1_rd_addr(w_rd_addr), .w1_rd_data(w_rd_data),
    .wdw_rd_en(1'b0), .wdw_rd_addr('0), .wdw_rd_data(),
    .q1_rd_en(q_rd_en), .q1_rd_addr(q_rd_addr), .q1_rd_data(q_rd_data),
    .qdw_rd_en(1'b0), .qdw_rd_addr('0), .qdw_rd_data());

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

  // one layer: returns the cycles from start to done
  task automatic run_layer(int h, int w, int ig, int og, int shift, bit relu, bit stress, output int cycles);
    int npix = h * w, ic = ig * 16, oc = og * 16;
    int in_fm[], wt[], sums[], scale[], bias[];
    int exp_flat[$];
    int n_out = 0;
    time t0;
    in_fm = new[npix * ic]; wt = new[oc * ic]; scale = new[oc]; bias = new[oc];
    foreach (in_fm[i]) in_fm[i] = $urandom_range(0, 255) - 128;
    foreach (wt[i])    wt[i]    = $urandom_range(0, 15) - 8;
    foreach (scale[i]) scale[i] = $urandom_range(0, 600) - 100;
    foreach (bias[i])  bias[i]  = $urandom_range(0, 40000) - 20000;
    // load weights: tile (og, ig) at address og*ig_count + ig
    for (int o = 0; o < og; o++)
      for (int i = 0; i < ig; i++) begin
        logic [PRM_W-1:0] v = '0;
        for (int a = 0; a < 16; a++)
          for (int b = 0; b < 16; b++) v[(a*16 + b)*4 +: 4] = 4'(wt[(o*16 + a)*ic + i*16 + b]);
        prm_write(BUF_W1, o*ig + i, v);
      end
    for (int o = 0; o < og; o++) begin
      logic [PRM_W-1:0] v = '0;
      for (int a = 0; a < 16; a++) v[a*48 +: 48] = {32'(bias[o*16 + a]), 16'(scale[o*16 + a])};
      prm_write(BUF_Q1, o, v);
    end
    conv1x1(in_fm, wt, npix, ic, oc, sums);
    for (int p = 0; p < npix; p++)
      for (int o = 0; o < og; o++)
        for (int a = 0; a < 16; a++)
          exp_flat.push_back(quant(sums[p*oc + o*16 + a], scale[o*16 + a], bias[o*16 + a], shift, relu));
    cfg = '0;
    cfg.height = 10'(h); cfg.width = 10'(w); cfg.in_groups = 7'(ig); cfg.out_groups = 7'(og);
    cfg.relu_1x1 = relu; cfg.shift_1x1 = 5'(shift);
    @(negedge clk);
    start = 1;
    t0 = $time;
    @(negedge clk);
    start = 0;
    fork
      begin : feed
        for (int p = 0; p < npix; p++)
          for (int i = 0; i < ig; i++) begin
            in_valid = 1;
            for (int b = 0; b < 16; b++) in_data[b] = 8'(in_fm[p*ic + i*16 + b]);
            #1;
            while (!in_ready) @(negedge clk);
            @(negedge clk);  // accepted at the edge in between
            in_valid = 0;
            if (stress && $urandom_range(0, 3) == 0) @(negedge clk);
          end
      end
      begin : drain
        while (n_out < npix * og) begin
          @(negedge clk);
          out_ready = stress ? ($urandom_range(0, 2) != 0) : 1'b1;
          #1;
          if (out_valid && out_ready) begin
            for (int a = 0; a < 16; a++)
              check(int'(out_data[a]) == exp_flat[n_out*16 + a],
                    $sformatf("word %0d lane %0d: got %0d want %0d", n_out, a, int'(out_data[a]), exp_flat[n_out*16 + a]));
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

  int cyc;
  initial begin
    start = 0; in_valid = 0; in_data = '0; out_ready = 0; cfg = '0;
    prm_wr_en = 0; prm_wr_sel = BUF_W1; prm_wr_addr = 0; prm_wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_layer(3, 4, 3, 2, 4, 1'b1, 1'b1, cyc);
    run_layer(2, 5, 1, 1, 0, 1'b0, 1'b1, cyc);
    run_layer(4, 2, 2, 4, 6, 1'b1, 1'b1, cyc);
    run_layer(2, 3, 8, 1, 7, 1'b0, 1'b1, cyc);
    // full speed: 6 pixels, ig = 4, og = 3
    run_layer(2, 3, 4, 3, 5, 1'b1, 1'b0, cyc);
    $display("full-speed layer: %0d cycles (compute %0d, load %0d)", cyc, 6*4*3, 6*4);
    check(cyc >= 4 + 6*4*3 && cyc <= 4 + 6*4*3 + 6, $sformatf("cycle count %0d", cyc));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
