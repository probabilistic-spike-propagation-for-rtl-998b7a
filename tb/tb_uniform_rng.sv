// tb_uniform_rng: checks the generator against the xorshift32 recurrence,
// that it holds without next, restarts from SEED on reset, and that its top
// byte is roughly uniform (mean and occupancy of all 256 values).
module tb_uniform_rng;
  import psp_ref_pkg::*;
  localparam logic [31:0] SEED = 32'hCAFE_0001;
  logic clk = 0, rst_n = 0, next = 0;
  logic [31:0] value, ref_v;
  int checks = 0, failures = 0;
  longint sum = 0;
  int seen [256];

  uniform_rng #(.SEED(SEED)) dut (.clk(clk), .rst_n(rst_n), .next(next), .value(value));
  always #5 clk = ~clk;

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

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    check(value == SEED, "reset value");
    ref_v = SEED;
    for (int i = 0; i < 4096; i++) begin
      next = ($urandom_range(0, 3) != 0);
      @(negedge clk);
      if (next) ref_v = xorshift32(ref_v);
      if (i < 64 || (i % 64) == 0) check(value == ref_v, $sformatf("sequence step %0d", i));
      else if (value != ref_v) check(0, $sformatf("sequence step %0d", i));
    end
    next = 1;
    for (int i = 0; i < 65536; i++) begin
      @(negedge clk);
      sum += value[31:24];
      seen[value[31:24]]++;
    end
    next = 0;
    check(sum / 65536 >= 125 && sum / 65536 <= 130, $sformatf("mean of top byte %0d", sum / 65536));
    begin
      automatic int empty = 0;
      foreach (seen[v]) if (seen[v] < 128) empty++;
      check(empty == 0, "every top-byte value occurs");
    end
    rst_n = 0;
    @(negedge clk);
    rst_n = 1;
    check(value == SEED, "reset reloads SEED");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
