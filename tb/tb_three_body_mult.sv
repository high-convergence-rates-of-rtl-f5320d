// tb_three_body_mult: exhaustive check of the three-body stochastic
// multiplier. For every coefficient in -127..127 and all four spin pairs the
// product must be c * m_j * m_k with m = 2*s - 1.
module tb_three_body_mult;
  logic              s_j, s_k;
  logic signed [7:0] c, p;
  int checks = 0, failures = 0;

  three_body_mult #(.W(8)) dut (.s_j, .s_k, .c, .p);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -127; v <= 127; v++) begin
      for (int b = 0; b < 4; b++) begin
        int mj, mk;
        s_j = b[0];
        s_k = b[1];
        c   = 8'(v);
        mj  = b[0] ? 1 : -1;
        mk  = b[1] ? 1 : -1;
        #1;
        checks++;
        if (int'(p) != v * mj * mk) begin
          failures++;
          $display("FAIL c=%0d sj=%0d sk=%0d p=%0d", v, s_j, s_k, p);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
