// tb_pwl_termpt: feeds random curves and random numbers and compares with the
// reference PWL formula (2-cycle latency checked on every result). It also
// checks the special cases (flat curve reaches the whole list, n_max = 0) and,
// for a linearly falling list of 1000 weights, that the PWL termination point
// stays within 1% of the exact count of weights >= r and averages about n/2.
module tb_pwl_termpt;
  import psp_pkg::*;
  import psp_ref_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [15:0] rnd = 0;
  logic [W_W-1:0] mag = 0, r_out;
  pos_t n_max = 0, termpt;
  pwl_seg_t segs [NSEG];
  int checks = 0, failures = 0;
  longint exp_q [$];

  pwl_termpt dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // latency check: each result pairs with the input given 2 cycles earlier
  logic v1, v2;
  always @(posedge clk) begin
    v1 <= in_valid; v2 <= v1;
    if (rst_n) check(out_valid == v2, "out_valid two cycles after in_valid");
  end

  task automatic issue(input longint expected);
    exp_q.push_back(expected);
    in_valid = 1;
    @(negedge clk);
    in_valid = 0;
  endtask

  always @(posedge clk) if (rst_n && out_valid) begin
    longint e;
    e = exp_q.pop_front();
    if (e >= 0) check(longint'(termpt) == e, $sformatf("termpt %0d expected %0d", termpt, e));
  end

  initial begin
    int w [];
    v1 = 0; v2 = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    // random decreasing curves
    for (int n = 0; n < 500; n++) begin
      int len, m;
      len = $urandom_range(1, 1500);
      m   = $urandom_range(1, 32767);
      w = new[len];
      w[0] = m;
      for (int j = 1; j < len; j++) begin
        w[j] = w[j-1] - $urandom_range(0, 3 * m / len + 1);
        if (w[j] < 0) w[j] = 0;
      end
      pwl_fit(w, len, segs);
      mag = 16'(m); n_max = pos_t'(len); rnd = 16'($urandom);
      issue(pwl_ref(scaled_r(longint'(rnd), longint'(m)), len, segs));
      if (n % 3 == 0) @(negedge clk);
    end
    // flat curve: every spike reaches the whole list
    w = new[300];
    foreach (w[j]) w[j] = 1000;
    pwl_fit(w, 300, segs);
    mag = 16'd1000; n_max = 16'd300;
    for (int n = 0; n < 20; n++) begin rnd = 16'($urandom); issue(300); end
    n_max = 0; rnd = 16'hFFFF; issue(0);
    // linear curve against the exact count of weights >= r
    w = new[1000];
    foreach (w[j]) w[j] = 20000 - 20 * j;
    pwl_fit(w, 1000, segs);
    mag = 16'd20000; n_max = 16'd1000;
    begin
      longint tot = 0;
      for (int n = 0; n < 300; n++) begin
        longint r, exact;
        rnd = 16'($urandom);
        r = scaled_r(longint'(rnd), 20000);
        exact = 0;
        foreach (w[j]) if (w[j] >= r) exact++;
        issue(-1);
        @(posedge clk); @(posedge clk); #1;
        check(longint'(termpt) >= exact - 10 && longint'(termpt) <= exact + 10,
              $sformatf("linear: termpt %0d exact %0d", termpt, exact));
        tot += longint'(termpt);
        @(negedge clk);
      end
      check(tot / 300 > 430 && tot / 300 < 570, $sformatf("linear: mean termpt %0d, about 500", tot / 300));
    end
    repeat (4) @(negedge clk);
    check(exp_q.size() == 0, "all results returned");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
