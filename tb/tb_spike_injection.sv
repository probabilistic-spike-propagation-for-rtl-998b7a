// tb_spike_injection: writes random intensities (with 0 and 255 corner
// values), runs several sweeps with a randomly stalling consumer and compares
// the spike ids with a reference that replays the xorshift32 sequence and the
// rule "spike when top random byte < intensity". Also checks the sweep length
// (n_in cycles plus stall cycles) and the spike rate of a full-intensity input.
module tb_spike_injection;
  import psp_pkg::*;
  import psp_ref_pkg::*;
  localparam int N_IN_MAX = 64;
  localparam logic [31:0] SEED = 32'h1234_5678;
  localparam int N_IN = 50;

  logic clk = 0, rst_n = 0;
  logic pix_we = 0;
  logic [15:0] pix_addr = 0;
  logic [7:0] pix_data = 0;
  logic [15:0] n_in = N_IN;
  logic start = 0, busy, out_valid, out_ready = 1;
  neuron_id_t out_id;
  int checks = 0, failures = 0;
  logic [7:0] pix [N_IN];
  logic [31:0] rs;
  int exp_ids [$];
  int got_ids [$];
  int cycles, stalls, full_hits = 0;

  spike_injection #(.N_IN_MAX(N_IN_MAX), .SEED(SEED)) dut (.*);
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

  always @(posedge clk) if (rst_n && out_valid && out_ready) got_ids.push_back(int'(out_id));

  initial begin
    for (int i = 0; i < N_IN; i++) pix[i] = 8'($urandom);
    pix[0] = 8'd0; pix[1] = 8'd255; pix[2] = 8'd128;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < N_IN; i++) begin
      @(negedge clk); pix_we = 1; pix_addr = 16'(i); pix_data = pix[i];
    end
    @(negedge clk); pix_we = 0;
    rs = SEED;
    for (int sweep = 0; sweep < 40; sweep++) begin
      exp_ids.delete(); got_ids.delete();
      for (int i = 0; i < N_IN; i++) begin
        if (rs[31:24] < pix[i]) exp_ids.push_back(i);
        rs = xorshift32(rs);
      end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cycles = 0; stalls = 0;
      while (busy) begin
        out_ready = (sweep % 2 == 0) ? 1'b1 : ($urandom_range(0, 2) != 0);
        #1;
        if (out_valid && !out_ready) stalls++;
        @(negedge clk);
        cycles++;
      end
      out_ready = 1;
      check(got_ids == exp_ids, $sformatf("sweep %0d spike ids (%0d expected, %0d seen)",
                                          sweep, exp_ids.size(), got_ids.size()));
      check(cycles == N_IN + stalls, $sformatf("sweep %0d length %0d, expected %0d",
                                               sweep, cycles, N_IN + stalls));
      foreach (got_ids[k]) if (got_ids[k] == 1) full_hits++;
      foreach (got_ids[k]) check(got_ids[k] != 0, "zero intensity never spikes");
    end
    check(full_hits >= 38, $sformatf("full intensity spiked in %0d of 40 sweeps", full_hits));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
