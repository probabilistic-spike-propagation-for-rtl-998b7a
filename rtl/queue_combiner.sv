// queue_combiner: double-buffered spike queue with two merged inputs.
//
// Spikes produced while timestep t is finishing (by evaluation) and the input
// spikes of timestep t+1 (by injection) must all be propagated in timestep
// t+1, never in t. The combiner therefore keeps two buffers: a write buffer
// that collects the next timestep's spikes from both producers, and a read
// buffer whose spikes the propagation unit drains in the current timestep.
// A pulse on swap exchanges the roles: the filled write buffer becomes the
// read buffer and the new write buffer starts empty.
//
// Inputs a (injection) and b (evaluation) are valid/ready streams. When both
// are valid in one cycle a round-robin arbiter accepts one of them; the other
// waits. A full write buffer drops ready on both inputs (the producers stall).
// The output stream presents the read buffer in FIFO order.
//
// The paper names the queue combiner and its two producers; the double
// buffering, the arbitration and the back-pressure are this design's choices.
// DEPTH must be at least the number of spikes one timestep can produce; with
// one spike per neuron and timestep, the number of neurons is enough.
//
// Timing: one write per cycle, one read per cycle, both the same cycle;
// out_* is a combinational read of the buffer. swap takes effect at the edge
// and must only be given while the read buffer is empty (asserted).
module queue_combiner
  import psp_pkg::*;
#(
  parameter int DEPTH = 4096
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       a_valid,
  output logic       a_ready,
  input  neuron_id_t a_id,
  input  logic       b_valid,
  output logic       b_ready,
  input  neuron_id_t b_id,
  input  logic       swap,
  output logic       out_valid,
  input  logic       out_ready,
  output neuron_id_t out_id,
  output logic [31:0] wr_count,     // entries in the write buffer
  output logic [31:0] contention    // cycles in which both inputs were valid
);

  localparam int AW = $clog2(DEPTH);

  neuron_id_t  mem [2][DEPTH];
  logic        wr_sel;              // buffer being written; !wr_sel is read
  logic [AW:0] wr_cnt, rd_cnt, rd_ptr;
  logic        full, last_b, grant_b, do_wr;
  neuron_id_t  wr_id;

  assign full    = (wr_cnt == (AW+1)'(DEPTH));
  // round robin: b wins a tie if a won the previous tie
  assign grant_b = b_valid && (!a_valid || !last_b);
  assign a_ready = !full && !grant_b;
  assign b_ready = !full && grant_b;
  assign do_wr   = !full && (a_valid || b_valid);
  assign wr_id   = grant_b ? b_id : a_id;

  assign out_valid = (rd_ptr != rd_cnt);
  assign out_id    = mem[!wr_sel][rd_ptr[AW-1:0]];
  assign wr_count  = 32'(wr_cnt);

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_sel][wr_cnt[AW-1:0]] <= wr_id;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_sel     <= 1'b0;
      wr_cnt     <= '0;
      rd_cnt     <= '0;
      rd_ptr     <= '0;
      last_b     <= 1'b0;
      contention <= '0;
    end else begin
      if (a_valid && b_valid) begin
        contention <= contention + 32'd1;
        if (!full) last_b <= grant_b;
      end
      if (swap) begin
        wr_sel <= !wr_sel;
        rd_cnt <= wr_cnt + (AW+1)'(do_wr);
        rd_ptr <= '0;
        wr_cnt <= '0;
      end else begin
        if (do_wr) wr_cnt <= wr_cnt + 1'b1;
        if (out_valid && out_ready) rd_ptr <= rd_ptr + 1'b1;
      end
    end
  end

  a_swap_empty: assert property (@(posedge clk) disable iff (!rst_n) swap |-> !out_valid)
    else $error("queue_combiner: swap while the read buffer still holds spikes");

endmodule
