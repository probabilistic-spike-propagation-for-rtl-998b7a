// offchip_mem_model: behavioural model of the off-chip (DRAM) index memory,
// for simulation only. It accepts one burst request at a time (address of the
// first target id, number of ids), waits LATENCY cycles and then returns the
// ids one per cycle, in order, starting no earlier than the cycle after the
// request was accepted. Contents are written with the write port or by the
// testbench; unwritten words read as 0. Sparse storage keeps large address
// spaces cheap.
module offchip_mem_model
  import psp_pkg::*;
#(
  parameter int LATENCY = 6
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       we,
  input  addr_t      waddr,
  input  neuron_id_t wdata,
  input  logic       req_valid,
  output logic       req_ready,
  input  addr_t      req_addr,
  input  pos_t       req_len,
  output logic       rvalid,
  output neuron_id_t rdata
);
  neuron_id_t mem [addr_t];
  logic       active;
  int         wait_cnt;
  addr_t      ptr;
  pos_t       left;

  assign req_ready = !active;
  assign rvalid    = active && wait_cnt == 0;
  assign rdata     = mem.exists(ptr) ? mem[ptr] : '0;

  always @(posedge clk) if (we) mem[waddr] = wdata;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active <= 1'b0;
      wait_cnt <= 0;
      ptr <= '0;
      left <= '0;
    end else if (!active) begin
      if (req_valid && req_len != '0) begin
        active   <= 1'b1;
        wait_cnt <= LATENCY;
        ptr      <= req_addr;
        left     <= req_len;
      end
    end else if (wait_cnt != 0) begin
      wait_cnt <= wait_cnt - 1;
    end else begin
      ptr  <= ptr + 1;
      left <= left - 1'b1;
      if (left == pos_t'(1)) active <= 1'b0;
    end
  end
endmodule
