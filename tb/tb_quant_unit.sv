// tb_quant_unit: random sums, scales, biases, shifts and ReLU settings, plus
// edge values, compared lane by lane with the reference quantizer.
module tb_quant_unit;
  import codenet_pkg::*;
  import codenet_ref_pkg::*;
  sum_t    [LANES-1:0] sum;
  qparam_t [LANES-1:0] qp;
  logic    [4:0]       shift;
  logic                relu;
  act_t    [LANES-1:0] q;
  int checks = 0, failures = 0;

  quant_unit dut (.sum, .qp, .shift, .relu, .q);

  initial begin
    for (int n = 0; n < 2000; n++) begin
      shift = 5'($urandom_range(0, 20));
      relu  = 1'($urandom);
      for (int c = 0; c < LANES; c++) begin
        sum[c]      = (n < 10) ? ((c % 2) ? 16'sh7FFF : -16'sh8000) : 16'($urandom);
        qp[c].scale = (n < 10) ? ((c % 3) ? 16'sh7FFF : -16'sh8000) : 16'($urandom);
        qp[c].bias  = (n % 3 == 0) ? 32'($urandom) : 32'($signed(16'($urandom)));
      end
      #1;
      for (int c = 0; c < LANES; c++) begin
        automatic int e = quant(int'(sum[c]), int'(qp[c].scale), int'(qp[c].bias), int'(shift), relu);
        checks++;
        if (int'(q[c]) != e) begin
          failures++;
          if (failures < 10)
            $display("FAIL: lane %0d sum %0d scale %0d bias %0d shift %0d relu %0d: got %0d want %0d",
                     c, int'(sum[c]), int'(qp[c].scale), int'(qp[c].bias), shift, relu, int'(q[c]), e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
