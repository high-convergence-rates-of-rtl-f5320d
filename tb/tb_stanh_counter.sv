// tb_stanh_counter: random increments, temperature changes, init and force
// applied to the saturated up/down counter, compared every cycle with a
// reference model: the counter holds one of 2*i0 states -i0..i0-1, adds the
// increment with saturation, and its output is 1 for the upper i0 states.
// Also checks that the output needs i0 consecutive +1 steps to rise from the
// bottom state, i.e. that there are 2*i0 states.
module tb_stanh_counter;
  logic clk = 0, rst_n = 0, en = 0, init = 0, force_en = 0, force_val = 0;
  logic [2:0]        i0 = 3'd2;
  logic signed [7:0] inc = '0;
  logic signed [2:0] cnt;
  logic              s;
  int checks = 0, failures = 0;
  int model;

  stanh_counter #(.I0_MAX(4), .IN_W(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what);
    checks++;
    if (int'(cnt) != model || s != (model >= 0)) begin
      failures++;
      $display("FAIL %s: i0=%0d cnt=%0d model=%0d s=%0d", what, i0, cnt, model, s);
    end
  endtask

  initial begin
    model = -1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check("reset");
    for (int t = 0; t < 4000; t++) begin
      int r, lo, hi, nxt;
      r         = int'($urandom_range(0, 99));
      en        = (r < 85);
      init      = (r == 99);
      force_en  = (r >= 95 && r < 99);
      force_val = $urandom_range(0, 1) == 1;
      inc       = 8'(int'($urandom_range(0, 14)) - 7);
      if (t % 50 == 0) i0 = ($urandom_range(0, 1) == 1) ? 3'd4 : 3'd2;
      lo = -int'(i0);
      hi = int'(i0) - 1;
      if (init)          nxt = -1;
      else if (force_en) nxt = force_val ? hi : lo;
      else if (en) begin
        nxt = model + int'(inc);
        if (nxt < lo) nxt = lo;
        if (nxt > hi) nxt = hi;
      end else           nxt = model;
      @(negedge clk);
      model = nxt;
      check("random");
    end
    // Number of states: from the bottom at i0 = 4, +1 steps.
    en = 1; init = 0; force_en = 0; i0 = 3'd4;
    inc = -8'sd8;
    @(negedge clk);
    inc = 8'sd1;
    for (int k = 1; k <= 4; k++) begin
      @(negedge clk);
      checks++;
      if (s != (k == 4)) begin
        failures++;
        $display("FAIL step %0d: s=%0d", k, s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
