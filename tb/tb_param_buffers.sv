// tb_param_buffers: fills the four parameter memories with random words
// through the load port, reads every word back on all four read ports and
// checks the data and the one-cycle read latency, including that the read
// data holds while no read is enabled.
module tb_param_buffers;
  import codenet_pkg::*;
  localparam int W1D = 32, WDD = 8, QD = 8;
  logic clk = 0;
  logic wr_en; buf_sel_e wr_sel; logic [11:0] wr_addr; logic [PRM_W-1:0] wr_data;
  logic w1_rd_en, wdw_rd_en, q1_rd_en, qdw_rd_en;
  logic [$clog2(W1D)-1:0] w1_rd_addr;
  logic [$clog2(WDD)-1:0] wdw_rd_addr;
  logic [$clog2(QD)-1:0]  q1_rd_addr, qdw_rd_addr;
  w1_tile_t w1_rd_data; wdw_vec_t wdw_rd_data; qparam_vec_t q1_rd_data, qdw_rd_data;
  logic [W1_W-1:0]  m_w1 [W1D];
  logic [WDW_W-1:0] m_wdw [WDD];
  logic [QV_W-1:0]  m_q1 [QD], m_qdw [QD];
  int checks = 0, failures = 0;

  param_buffers #(.W1_DEPTH(W1D), .WDW_DEPTH(WDD), .Q_DEPTH(QD)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [PRM_W-1:0] rnd_word();
    logic [PRM_W-1:0] v;
    for (int i = 0; i < PRM_W / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic load(buf_sel_e sel, int addr, logic [PRM_W-1:0] data);
    @(negedge clk);
    wr_en = 1; wr_sel = sel; wr_addr = 12'(addr); wr_data = data;
    @(negedge clk);
    wr_en = 0;
  endtask

  initial begin
    wr_en = 0; w1_rd_en = 0; wdw_rd_en = 0; q1_rd_en = 0; qdw_rd_en = 0;
    w1_rd_addr = 0; wdw_rd_addr = 0; q1_rd_addr = 0; qdw_rd_addr = 0;
    wr_sel = BUF_W1; wr_addr = 0; wr_data = 0;
    for (int a = 0; a < W1D; a++) begin automatic logic [PRM_W-1:0] v = rnd_word(); m_w1[a] = v[W1_W-1:0]; load(BUF_W1, a, v); end
    for (int a = 0; a < WDD; a++) begin automatic logic [PRM_W-1:0] v = rnd_word(); m_wdw[a] = v[WDW_W-1:0]; load(BUF_WDW, a, v); end
    for (int a = 0; a < QD; a++) begin automatic logic [PRM_W-1:0] v = rnd_word(); m_q1[a] = v[QV_W-1:0]; load(BUF_Q1, a, v); end
    for (int a = 0; a < QD; a++) begin automatic logic [PRM_W-1:0] v = rnd_word(); m_qdw[a] = v[QV_W-1:0]; load(BUF_QDW, a, v); end
    // read back, all four ports at once, in random order
    for (int n = 0; n < 200; n++) begin
      automatic int a1 = $urandom_range(0, W1D-1), a2 = $urandom_range(0, WDD-1);
      automatic int a3 = $urandom_range(0, QD-1),  a4 = $urandom_range(0, QD-1);
      @(negedge clk);
      w1_rd_en = 1; wdw_rd_en = 1; q1_rd_en = 1; qdw_rd_en = 1;
      w1_rd_addr = 5'(a1); wdw_rd_addr = 3'(a2); q1_rd_addr = 3'(a3); qdw_rd_addr = 3'(a4);
      @(negedge clk);
      w1_rd_en = 0; wdw_rd_en = 0; q1_rd_en = 0; qdw_rd_en = 0;
      w1_rd_addr = ~w1_rd_addr; wdw_rd_addr = ~wdw_rd_addr;
      check(w1_rd_data  == m_w1[a1],  $sformatf("w1 word %0d", a1));
      check(wdw_rd_data == m_wdw[a2], $sformatf("wdw word %0d", a2));
      check(q1_rd_data  == m_q1[a3],  $sformatf("q1 word %0d", a3));
      check(qdw_rd_data == m_qdw[a4], $sformatf("qdw word %0d", a4));
      @(negedge clk);  // no read enabled: data must hold
      check(w1_rd_data == m_w1[a1] && wdw_rd_data == m_wdw[a2], "read data held");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
