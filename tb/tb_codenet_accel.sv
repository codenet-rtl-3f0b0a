// tb_codenet_accel: end-to-end test of the accelerator at its default sizes.
//
// Weights and quantization parameters are loaded through the parameter port,
// then whole layers are streamed through: 1x1 convolution, quantization,
// 3x3 depthwise (deformable) convolution, quantization.  Each output word is
// compared with the reference model (1x1 reference, quantize, depthwise
// reference, quantize).  Layers cover: both engines with deformable offsets,
// the 1x1 engine bypassed with stride 2, the 3x3 engine bypassed, and one
// CoDeNet-sized layer (32 x 32 pixels, 64 -> 64 channels, deformable, the
// size of an upsampling block of the detector head) at full speed.  The
// test counts how often each mechanism happened - 1x1 bypass, 3x3 bypass,
// deformable sampling, stride 2, offsets clipped below 0 and above 7, input
// back-pressure, output stalls - and fails if one never did.
module tb_codenet_accel;
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
  int n_byp1 = 0, n_bypdw = 0, n_deform = 0, n_stride2 = 0, n_clip_lo = 0, n_clip_hi = 0;
  int n_in_stall = 0, n_out_stall = 0;

  codenet_accel dut (.*);

  always #2 clk = ~clk;   // 250 MHz

  always @(posedge clk) begin
    if (in_valid && !in_ready) n_in_stall++;
    if (out_valid && !out_ready) n_out_stall++;
  end

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
      if (deform)
        for (int p = 0; p < ho * wo; p++) begin
          if (offs[p] < 0) n_clip_lo++;
          if (offs[p] > 7) n_clip_hi++;
        end
    end
    n_words = ho * wo * c2 / 16;
    if (byp1) n_byp1++;
    if (bypdw) n_bypdw++;
    if (deform && !bypdw) n_deform++;
    if (stride == 2 && !bypdw) n_stride2++;
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
  initial begin
    start = 0; in_valid = 0; in_data = '0; out_ready = 0; cfg = '0; off_valid = 0; off_data = 0;
    prm_wr_en = 0; prm_wr_sel = BUF_W1; prm_wr_addr = 0; prm_wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_layer(10, 6, 2, 3, 1'b0, 1'b0, 1, 1'b1, 1'b1, cyc);  // 1x1 + deformable 3x3
    run_layer(9, 7, 2, 1, 1'b1, 1'b0, 2, 1'b0, 1'b1, cyc);   // 3x3 only, stride 2
    run_layer(4, 5, 3, 2, 1'b0, 1'b1, 1, 1'b0, 1'b1, cyc);   // 1x1 only
    run_layer(18, 5, 1, 2, 1'b0, 1'b0, 2, 1'b1, 1'b1, cyc);  // 1x1 + deformable, stride 2
    // CoDeNet-sized layer at full speed
    run_layer(32, 32, 4, 4, 1'b0, 1'b0, 1, 1'b1, 1'b0, cyc);
    $display("32x32x64 layer: %0d cycles (%0.1f us at 250 MHz)", cyc, cyc / 250.0);
    // the 1x1 engine needs 16 rounds a pixel (loads overlap the rounds);
    // the 3x3 engine 4 cycles a pixel, one for the offset, plus the row
    // writes; the slower 1x1 engine sets the pace
    check(cyc >= 1024 * 16 && cyc <= 1024 * 20 * 2, $sformatf("cycle count %0d", cyc));
    $display("mechanisms: bypass_1x1 %0d, bypass_dw %0d, deformable %0d, stride2 %0d, clip<0 %0d, clip>7 %0d, input stalls %0d, output stalls %0d",
             n_byp1, n_bypdw, n_deform, n_stride2, n_clip_lo, n_clip_hi, n_in_stall, n_out_stall);
    check(n_byp1 > 0, "1x1 bypass never used");
    check(n_bypdw > 0, "3x3 bypass never used");
    check(n_deform > 0, "deformable mode never used");
    check(n_stride2 > 0, "stride 2 never used");
    check(n_clip_lo > 0 && n_clip_hi > 0, "offset clipping never exercised");
    check(n_in_stall > 0, "input back-pressure never happened");
    check(n_out_stall > 0, "output stall never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
