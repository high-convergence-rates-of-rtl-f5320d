// tb_two_body_mult: exhaustive check of the two-body stochastic multiplier.
// For every coefficient in -127..127 and both spin bits the product must be
// c * m_j with m_j = 2*s_j - 1.
module tb_two_body_mult;
  logic              s_j;
  logic signed [7:0] c, p;
  int checks = 0, failures = 0;

  two_body_mult #(.W(8)) dut (.s_j, .c, .p);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -127; v <= 127; v++) begin
      for (int b = 0; b < 2; b++) begin
        int m;
        s_j = b[0];
        c   = 8'(v);
        m   = b ? 1 : -1;
        #1;
        checks++;
        if (int'(p) != v * m) begin
          failures++;
          $display("FAIL c=%0d s=%0d p=%0d", v, b, p);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
