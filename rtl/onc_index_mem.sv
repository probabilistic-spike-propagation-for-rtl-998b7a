// onc_index_mem: on-chip store of the leading target indices.
//
// Every sorted outgoing list keeps its first onc_len target neuron ids in this
// memory; the rest stay in off-chip memory. Because a spike reaches only the
// first termpt entries of a sorted list, the leading entries are read far more
// often than the tail, and keeping them on chip removes most off-chip reads
// (the paper's trade of on-chip storage for off-chip accesses, Fig. 5 "ONC").
// Software fills the memory through the write port.
//
// It is a simple dual-port RAM of DEPTH entries of one neuron id each, with a
// registered read: rd_data holds the entry addressed by rd_addr one cycle
// after rd_en. The depth (512 Ki entries, about a fifth of the 2.39 M
// synapses of the 784-1200-1200-10 network) is this design's choice; the
// paper gives no on-chip capacity. Out-of-range writes are ignored and
// out-of-range reads return 0.
module onc_index_mem
  import psp_pkg::*;
#(
  parameter int DEPTH = 524288
) (
  input  logic       clk,
  input  logic       we,
  input  addr_t      wr_addr,
  input  neuron_id_t wr_data,
  input  logic       rd_en,
  input  addr_t      rd_addr,
  output neuron_id_t rd_data
);

  localparam int AW = $clog2(DEPTH);

  neuron_id_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && wr_addr < addr_t'(DEPTH)) mem[wr_addr[AW-1:0]] <= wr_data;
    if (rd_en) rd_data <= (rd_addr < addr_t'(DEPTH)) ? mem[rd_addr[AW-1:0]] : '0;
  end

endmodule
