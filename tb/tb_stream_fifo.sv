// tb_stream_fifo: random traffic through a 5-deep FIFO, checked against a
// queue model: every word read must be the oldest one written, count and
// almost_full must match the model, and the FIFO must reach full and empty.
module tb_stream_fifo;
  localparam int DEPTH = 5;
  logic clk = 0, rst_n = 0;
  logic wr_valid, wr_ready, rd_valid, rd_ready, af;
  logic [15:0] wr_data, rd_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0, saw_full = 0, saw_empty_rd = 0;
  logic [15:0] model[$];

  stream_fifo #(.WIDTH(16), .DEPTH(DEPTH), .AF_MARGIN(2)) dut (
    .clk, .rst_n, .wr_valid, .wr_ready, .wr_data, .rd_valid, .rd_ready, .rd_data,
    .count, .almost_full(af));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    wr_valid = 0; rd_ready = 0; wr_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      // phases bias towards filling or draining
      int bias;
      @(negedge clk);
      bias = (cyc / 300) % 2;
      wr_valid = ($urandom_range(0, 9) < (bias ? 8 : 3));
      rd_ready = ($urandom_range(0, 9) < (bias ? 3 : 8));
      wr_data  = 16'($urandom);
      #1;
      check(int'(count) == model.size(), $sformatf("count %0d vs %0d", count, model.size()));
      check(wr_ready == (model.size() < DEPTH), "wr_ready");
      check(rd_valid == (model.size() > 0), "rd_valid");
      check(af == (model.size() > DEPTH - 2), "almost_full");
      if (rd_valid) check(rd_data == model[0], $sformatf("data %h vs %h", rd_data, model[0]));
      if (model.size() == DEPTH) saw_full++;
      if (rd_ready && model.size() == 0) saw_empty_rd++;
      @(posedge clk);
      if (rd_valid && rd_ready) void'(model.pop_front());
      if (wr_valid && wr_ready) model.push_back(wr_data);
    end
    check(saw_full > 0, "never full");
    check(saw_empty_rd > 0, "never empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
