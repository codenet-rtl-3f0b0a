// tb_codenet_workloads: runs layers of the sizes the detector actually uses
// through the accelerator at its default parameters, and checks every output
// word against the reference model.
//
//   1. The depthwise test kernel of the operation study: 64 x 64 pixels,
//      256 channels, square deformable 3x3, 1x1 engine bypassed.  Its rows
//      are 64 x 16 = 1024 words, exactly what one buffer line holds.
//   2. A second-stage unit of the 2x-width backbone at 512 x 512 input:
//      64 x 64 pixels, 128 channels (122 rounded up to whole groups),
//      1x1 (8 -> 8 groups) then plain 3x3, the widest rows (512 words) of
//      that network.
//   3. The largest 1x1 layer of the 2x-width backbone, 488 channels rounded
//      up to 496 (31 groups): 961 weight tiles of the 1024 the buffer holds,
//      on an 8 x 8 feature map, followed by a plain stride-2 3x3.
//
// For each layer the test prints the cycle count and the rate reached, and
// checks it against the engines' peak rates: one 16-channel group per cycle
// for the 3x3 engine, one 16x16 round per cycle for the 1x1 engine.  The
// stream protocol and the reference model are the same as in the end-to-end
// test; the layer sizes are this design's reading of the published network.
module tb_codenet_workloads;
  import codenet_pkg::*;
  import codenet_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  layer_cfg_t cfg;
  logic prm_wr_en; buf_sel_e prm_wr_sel; logic [11:0] prm_wr_addr; logic [PRM_W-1:0] prm_wr_data;
  logic in_valid, in_ready, off_valid, off_ready, out_valid, out_ready;
  act_vec_t in_data, out_data;
  logic signed [7:0] off_data;
  int checks = 0, failures = 0;

  codenet_accel dut (.*);

  always #2 clk = ~clk;   // 250 MHz

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

  task automatic run_layer(int h, int w, int ig, int og, bit byp1, bit bypdw, int stride, bit deform,
                           bit stress, output int cycles);
    int ic = ig * 16, oc = og * 16, c2, ho, wo, n_out = 0, n_words;
    time t0;
    int in_fm[], w1[], s1[], mid[], wd[], offs[], s2[];
    int sc1[], b1[], sc2[], b2[];
    int exp_flat[$];
    int sh1 = 6, sh2 = 5;
    c2 = byp1 ? ic : oc;
    in_fm = new[h * w * ic]; w1 = new[oc * ic]; wd = new[c2 * 9];
    sc1 = new[oc]; b1 = new[oc]; sc2 = new[c2]; b2 = new[c2];
    offs = new[(h + 1) * (w + 1)];
    foreach (in_fm[i]) in_fm[i] = $urandom_range(0, 255) - 128;
    foreach (w1[i])    w1[i]    = $urandom_range(0, 15) - 8;
    foreach (wd[i])    wd[i]    = $urandom_range(0, 15) - 8;
    foreach (offs[i])  offs[i]  = $urandom_range(0, 11) - 2;
    foreach (sc1[i])   sc1[i]   = $urandom_range(1, 40);
    foreach (b1[i])    b1[i]    = $urandom_range(0, 4000) - 1000;
    foreach (sc2[i])   sc2[i]   = $urandom_range(1, 40);
    foreach (b2[i])    b2[i]    = $urandom_range(0, 4000) - 1000;
    // load the parameter buffers
    if (!byp1) begin
      for (int o = 0; o < og; o++)
        for (int i = 0; i < ig; i++) begin
          logic [PRM_W-1:0] v = '0;
          for (int a = 0; a < 16; a++)
            for (int b = 0; b < 16; b++) v[(a*16 + b)*4 +: 4] = 4'(w1[(o*16 + a)*ic + i*16 + b]);
          prm_write(BUF_W1, o*ig + i, v);
        end
      for (int o = 0; o < og; o++) begin
        logic [PRM_W-1:0] v = '0;
        for (int a = 0; a < 16; a++) v[a*48 +: 48] = {32'(b1[o*16 + a]), 16'(sc1[o*16 + a])};
        prm_write(BUF_Q1, o, v);
      end
    end
    if (!bypdw)
      for (int g = 0; g < c2 / 16; g++) begin
        logic [PRM_W-1:0] v = '0, q = '0;
        for (int a = 0; a < 16; a++) begin
          for (int t = 0; t < 9; t++) v[(a*9 + t)*4 +: 4] = 4'(wd[(g*16 + a)*9 + t]);
          q[a*48 +: 48] = {32'(b2[g*16 + a]), 16'(sc2[g*16 + a])};
        end
        prm_write(BUF_WDW, g, v);
        prm_write(BUF_QDW, g, q);
      end
    // reference
    if (byp1) mid = in_fm;
    else begin
      conv1x1(in_fm, w1, h * w, ic, oc, s1);
      mid = new[h * w * oc];
      for (int p = 0; p < h * w; p++)
        for (int o = 0; o < oc; o++) mid[p*oc + o] = quant(s1[p*oc + o], sc1[o], b1[o], sh1, 1'b1);
    end
    if (bypdw) begin
      ho = h; wo = w;
      foreach (mid[i]) exp_flat.push_back(mid[i]);
    end else begin
      dwconv(mid, wd, offs, h, w, c2, stride, deform, s2, ho, wo);
      for (int p = 0; p < ho * wo; p++)
        for (int ch = 0; ch < c2; ch++) exp_flat.push_back(quant(s2[p*c2 + ch], sc2[ch], b2[ch], sh2, 1'b1));
    end
    n_words = ho * wo * c2 / 16;
    cfg = '0;
    cfg.height = 10'(h); cfg.width = 10'(w); cfg.in_groups = 7'(ig); cfg.out_groups = 7'(og);
    cfg.stride2 = (stride == 2); cfg.deform_en = deform; cfg.bypass_1x1 = byp1; cfg.bypass_dw = bypdw;
    cfg.relu_1x1 = 1; cfg.relu_dw = 1; cfg.shift_1x1 = 5'(sh1); cfg.shift_dw = 5'(sh2);
    @(negedge clk);
    start = 1;
    t0 = $time;
    @(negedge clk);
    start = 0;
    check(busy, "busy after start");
    fork
      begin : feed
        for (int p = 0; p < h * w; p++)
          for (int g = 0; g < ig; g++) begin
            in_valid = 1;
            for (int b = 0; b < 16; b++) in_data[b] = 8'(in_fm[p*ic + g*16 + b]);
            #1;
            while (!in_ready) @(negedge clk);
            @(negedge clk);
            in_valid = 0;
            if (stress && $urandom_range(0, 3) == 0) @(negedge clk);
          end
      end
      begin : feed_offsets
        if (deform && !bypdw)
          for (int p = 0; p < ho * wo; p++) begin
            off_valid = 1;
            off_data = 8'(offs[p]);
            #1;
            while (!off_ready) @(negedge clk);
            @(negedge clk);
            off_valid = 0;
          end
      end
      begin : drain
        while (n_out < n_words) begin
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
        cycles = int'(($time - t0) / 4);
      end
    join
    @(negedge clk);
    out_ready = 0;
    check(!busy && !out_valid, "idle after the layer");
  endtask

  int cyc;
  real gops;
  initial begin
    start = 0; in_valid = 0; in_data = '0; out_ready = 0; cfg = '0; off_valid = 0; off_data = 0;
    prm_wr_en = 0; prm_wr_sel = BUF_W1; prm_wr_addr = 0; prm_wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. 64 x 64 x 256 square deformable depthwise kernel
    run_layer(64, 64, 16, 1, 1'b1, 1'b0, 1, 1'b1, 1'b0, cyc);
    gops = 2.0 * 64 * 64 * 256 * 9 / (cyc * 4.0);
    $display("64x64x256 deformable depthwise: %0d cycles, %0.2f ms, %0.1f GOP/s", cyc, cyc * 4.0e-6, gops);
    // compute 64*64*16 groups plus 64*64*16 row writes, plus offsets
    check(cyc >= 64*64*16 && cyc <= 64*64*(16 + 16 + 1) + 64 * 40, $sformatf("kernel cycles %0d", cyc));

    // 2. backbone stage-2 unit: 64 x 64 pixels, 128 -> 128 channels
    run_layer(64, 64, 8, 8, 1'b0, 1'b0, 1, 1'b0, 1'b0, cyc);
    gops = 2.0 * 64 * 64 * (128 * 128 + 128 * 9) / (cyc * 4.0);
    $display("64x64, 128 -> 128 ch, 1x1 + 3x3: %0d cycles, %0.2f ms, %0.1f GOP/s", cyc, cyc * 4.0e-6, gops);
    // the 1x1 engine needs 64 rounds a pixel and sets the pace
    check(cyc >= 64*64*64 && cyc <= 64*64*64 + 64*64*8 + 2000, $sformatf("stage-2 cycles %0d", cyc));

    // 3. 496 -> 496 channel 1x1 (961 tiles), then stride-2 3x3
    run_layer(8, 8, 31, 31, 1'b0, 1'b0, 2, 1'b0, 1'b0, cyc);
    gops = 2.0 * 64 * 496 * 496 / (cyc * 4.0);
    $display("8x8, 496 -> 496 ch 1x1 + stride-2 3x3: %0d cycles, %0.1f GOP/s (1x1 part)", cyc, gops);
    check(cyc >= 64*961 && cyc <= 64*961 + 2000, $sformatf("large 1x1 cycles %0d", cyc));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
