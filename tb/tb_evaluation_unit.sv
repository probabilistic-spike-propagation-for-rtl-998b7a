// tb_evaluation_unit: sends random weight updates (with some large ones to
// reach both saturation limits), then runs evaluation sweeps and compares
// against a reference array of potentials: which neurons fire and in what
// order they are queued (with random back-pressure), reset to 0 on firing,
// final-layer neurons counted instead of queued, saturation count, and the
// sweep length (one neuron per cycle plus stalls). Ends with a clear.
module tb_evaluation_unit;
  import psp_pkg::*;
  localparam int N = 64;
  localparam int NOUT = 8;
  localparam int LO = 8, OUT_BASE = 56, HI = 64;

  logic clk = 0, rst_n = 0;
  logic upd_valid = 0;
  update_t upd = '0;
  potential_t v_th = 24'sd5000;
  neuron_id_t out_base = OUT_BASE;
  logic clear = 0, sweep_start = 0;
  neuron_id_t sweep_lo = LO, sweep_hi = HI;
  logic busy, spk_valid, spk_ready = 1;
  neuron_id_t spk_id;
  logic [7:0] cnt_rd_addr = 0;
  logic [31:0] cnt_rd_data, st_fired, st_saturated;
  int checks = 0, failures = 0;

  evaluation_unit #(.N_NEURONS(N), .N_OUT_MAX(NOUT)) dut (.*);
  always #5 clk = ~clk;

  longint vref [N];
  int     cref [NOUT];
  int     exp_q [$];
  int     got_q [$];
  int     sat_ref = 0, fired_ref = 0;
  localparam longint VMAX = (1 << (V_W - 1)) - 1;
  localparam longint VMIN = -(1 << (V_W - 1));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && spk_valid && spk_ready) got_q.push_back(int'(spk_id));

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    while (busy) @(negedge clk);
    foreach (vref[i]) vref[i] = 0;
    foreach (cref[i]) cref[i] = 0;
    for (int step = 0; step < 40; step++) begin
      int cycles, stalls;
      // integrate
      for (int u = 0; u < 200; u++) begin
        automatic int  t = $urandom_range(0, N - 1);
        automatic int  w = int'($urandom_range(0, 1600)) - 500;
        automatic bit  v = ($urandom_range(0, 4) != 0);
        if (step >= 30 && u % 2 == 0) begin      // drive neuron 20 to +limit, then 21 to -limit
          v = 1;
          t = (step < 35) ? 20 : 21;
          w = (step < 35) ? 32767 : -32768;
        end
        upd_valid  = v;
        upd.target = neuron_id_t'(t);
        upd.weight = weight_t'(w);
        if (v) begin
          vref[t] += longint'(w);
          if (vref[t] > VMAX) begin vref[t] = VMAX; sat_ref++; end
          if (vref[t] < VMIN) begin vref[t] = VMIN; sat_ref++; end
        end
        @(negedge clk);
      end
      upd_valid = 0;
      // reference evaluation
      exp_q.delete(); got_q.delete();
      for (int i = LO; i < HI; i++)
        if (vref[i] >= 5000) begin
          vref[i] = 0; fired_ref++;
          if (i >= OUT_BASE) cref[i - OUT_BASE]++; else exp_q.push_back(i);
        end
      sweep_start = 1;
      @(negedge clk); sweep_start = 0;
      cycles = 0; stalls = 0;
      while (busy) begin
        spk_ready = (step % 2 == 0) ? 1'b1 : ($urandom_range(0, 1) != 0);
        #1;
        if (spk_valid && !spk_ready) stalls++;
        @(negedge clk);
        cycles++;
      end
      spk_ready = 1;
      check(got_q == exp_q, $sformatf("step %0d queued spikes (%0d vs %0d)", step, got_q.size(), exp_q.size()));
      check(cycles == (HI - LO) + stalls, $sformatf("step %0d sweep length %0d", step, cycles));
      for (int i = 0; i < N; i++)
        if (longint'(dut.vmem[i]) != vref[i]) check(0, $sformatf("step %0d potential %0d: %0d vs %0d", step, i, dut.vmem[i], vref[i]));
      for (int o = 0; o < NOUT; o++) begin
        cnt_rd_addr = 8'(o); #1;
        check(cnt_rd_data == 32'(cref[o]), $sformatf("step %0d count %0d: %0d vs %0d", step, o, cnt_rd_data, cref[o]));
      end
      @(negedge clk);
    end
    check(st_saturated == 32'(sat_ref) && sat_ref > 0, $sformatf("saturations %0d vs %0d", st_saturated, sat_ref));
    check(st_fired == 32'(fired_ref), "fired count");
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    while (busy) @(negedge clk);
    for (int i = 0; i < N; i++) if (dut.vmem[i] != 0) check(0, "clear zeroes potentials");
    cnt_rd_addr = 0; #1;
    check(cnt_rd_data == 0, "clear zeroes counts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
