// tb_line_buffer: writes random words into all 15 line memories, then reads
// them through the three ports: three different lines per cycle at random
// addresses, and all three ports on one line at one address.  Checks the
// data one cycle later and that a read sees the old word when the same
// address is written in that cycle.
module tb_line_buffer;
  import codenet_pkg::*;
  localparam int LINES = 15, RW = 16, W = 32;
  logic clk = 0;
  logic wr_en; logic [3:0] wr_line; logic [3:0] wr_addr; logic [W-1:0] wr_data;
  logic [2:0] rd_en; logic [2:0][3:0] rd_line; logic [2:0][3:0] rd_addr;
  logic [2:0][W-1:0] rd_data;
  logic [W-1:0] model [LINES][RW];
  int checks = 0, failures = 0;

  line_buffer #(.LINES(LINES), .ROW_WORDS(RW), .WIDTH(W), .NPORTS(3)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    wr_en = 0; rd_en = 0; rd_line = '0; rd_addr = '0; wr_line = 0; wr_addr = 0; wr_data = 0;
    for (int l = 0; l < LINES; l++)
      for (int a = 0; a < RW; a++) begin
        @(negedge clk);
        wr_en = 1; wr_line = 4'(l); wr_addr = 4'(a); wr_data = $urandom;
        model[l][a] = wr_data;
      end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 500; n++) begin
      int l0, l1, l2;
      int a[3];
      automatic bit same = (n % 5 == 0);
      l0 = $urandom_range(0, LINES-1);
      do l1 = $urandom_range(0, LINES-1); while (l1 == l0);
      do l2 = $urandom_range(0, LINES-1); while (l2 == l0 || l2 == l1);
      if (same) begin l1 = l0; l2 = l0; end
      for (int p = 0; p < 3; p++) a[p] = same ? a[0] : $urandom_range(0, RW-1);
      if (same) begin a[0] = $urandom_range(0, RW-1); a[1] = a[0]; a[2] = a[0]; end
      @(negedge clk);
      rd_en = 3'b111;
      rd_line[0] = 4'(l0); rd_line[1] = 4'(l1); rd_line[2] = 4'(l2);
      for (int p = 0; p < 3; p++) rd_addr[p] = 4'(a[p]);
      // write the word port 0 reads in the same cycle
      wr_en = 1; wr_line = 4'(l0); wr_addr = 4'(a[0]); wr_data = $urandom;
      @(negedge clk);
      rd_en = 0; wr_en = 0;
      check(rd_data[0] == model[l0][a[0]], $sformatf("port0 line %0d addr %0d", l0, a[0]));
      check(rd_data[1] == model[l1][a[1]], $sformatf("port1 line %0d addr %0d", l1, a[1]));
      check(rd_data[2] == model[l2][a[2]], $sformatf("port2 line %0d addr %0d", l2, a[2]));
      model[l0][a[0]] = wr_data;
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
