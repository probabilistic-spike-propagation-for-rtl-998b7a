// tb_onc_index_mem: fills the memory with random ids, reads back random
// addresses and checks the one-cycle read latency, that rd_data holds while
// rd_en is low, and that out-of-range reads return 0 and writes are ignored.
module tb_onc_index_mem;
  import psp_pkg::*;
  localparam int DEPTH = 1024;
  logic clk = 0, we = 0, rd_en = 0;
  addr_t wr_addr = 0, rd_addr = 0;
  neuron_id_t wr_data = 0, rd_data;
  neuron_id_t ref_mem [DEPTH];
  int checks = 0, failures = 0;

  onc_index_mem #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      ref_mem[i] = neuron_id_t'($urandom);
      @(negedge clk); we = 1; wr_addr = addr_t'(i); wr_data = ref_mem[i];
    end
    @(negedge clk); we = 1; wr_addr = addr_t'(DEPTH + 3); wr_data = 16'hBEEF;   // ignored
    @(negedge clk); we = 0;
    for (int n = 0; n < 2000; n++) begin
      int a;
      a = $urandom_range(0, DEPTH - 1);
      rd_en = 1; rd_addr = addr_t'(a);
      @(negedge clk);
      check(rd_data == ref_mem[a], $sformatf("read %0d", a));
      rd_en = 0; rd_addr = addr_t'((a + 1) % DEPTH);
      @(negedge clk);
      check(rd_data == ref_mem[a], "hold without rd_en");
    end
    rd_en = 1; rd_addr = addr_t'(DEPTH + 3);
    @(negedge clk);
    check(rd_data == '0, "out-of-range read");
    rd_addr = addr_t'(3);
    @(negedge clk);
    check(rd_data == ref_mem[3], "out-of-range write ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
