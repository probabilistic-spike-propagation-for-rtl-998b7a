// tb_queue_combiner: drives both producers with random traffic, swaps the
// buffers between "timesteps" and checks that the read side returns exactly
// the ids accepted in the previous timestep, in acceptance order; that the
// arbiter alternates when both producers wait; that a full write buffer stalls
// both producers; and that the contention counter counts tie cycles.
module tb_queue_combiner;
  import psp_pkg::*;
  localparam int DEPTH = 16;
  logic clk = 0, rst_n = 0;
  logic a_valid = 0, b_valid = 0, swap = 0, out_ready = 0;
  logic a_ready, b_ready, out_valid;
  neuron_id_t a_id = 0, b_id = 0, out_id;
  logic [31:0] wr_count, contention;
  int checks = 0, failures = 0;
  int accepted [$];
  int prev [$];
  int got [$];
  int ties = 0;
  int grants [$];

  queue_combiner #(.DEPTH(DEPTH)) dut (.*);
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

  always @(posedge clk) if (rst_n) begin
    if (a_valid && b_valid) ties++;
    if (a_valid && a_ready) accepted.push_back(int'(a_id));
    if (b_valid && b_ready) accepted.push_back(int'(b_id));
    if (out_valid && out_ready) got.push_back(int'(out_id));
    check(!(a_ready && b_ready), "at most one producer accepted per cycle");
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int step = 0; step < 30; step++) begin
      int n_a, n_b, sent_a, sent_b;
      n_a = $urandom_range(0, 7);
      n_b = $urandom_range(0, 7);
      if (step == 5) begin n_a = 12; n_b = 12; end      // overfill: 24 > DEPTH
      sent_a = 0; sent_b = 0;
      accepted.delete(); got.delete();
      // producers, while the read side drains the previous timestep
      out_ready = 1;
      for (int cyc = 0; cyc < 80; cyc++) begin
        @(negedge clk);
        if (a_valid && a_ready) sent_a++;
        if (b_valid && b_ready) sent_b++;
        a_valid = (sent_a < n_a) && (step == 5 || $urandom_range(0, 1));
        b_valid = (sent_b < n_b) && (step == 5 || $urandom_range(0, 1));
        a_id = neuron_id_t'(step * 64 + sent_a);
        b_id = neuron_id_t'(step * 64 + 32 + sent_b);
        out_ready = $urandom_range(0, 3) != 0;
      end
      a_valid = 0; b_valid = 0; out_ready = 1;
      @(negedge clk);
      while (out_valid) @(negedge clk);
      check(got == prev, $sformatf("step %0d: read buffer returns previous timestep in order", step));
      if (step == 5) begin
        check(accepted.size() == DEPTH, $sformatf("full buffer holds %0d, accepted %0d", DEPTH, accepted.size()));
        check(wr_count == 32'(DEPTH), "write count at full");
        // grants alternated while both waited: ids alternate a,b,a,b...
        for (int k = 1; k < DEPTH; k++)
          check((accepted[k] % 64 >= 32) != (accepted[k-1] % 64 >= 32), $sformatf("alternation at %0d", k));
      end else begin
        check(accepted.size() == n_a + n_b, $sformatf("step %0d all accepted", step));
      end
      prev = accepted;
      swap = 1;
      @(negedge clk);
      swap = 0;
    end
    check(contention == 32'(ties), $sformatf("contention %0d vs %0d", contention, ties));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
