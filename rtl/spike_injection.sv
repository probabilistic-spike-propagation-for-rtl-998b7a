// spike_injection: rate-coded input spike generator.
//
// Software writes one intensity per input neuron (pixel memory). Each pulse on
// start runs one sweep, the injection for one timestep: for input neurons
// i = 0 .. n_in-1 in order, one 32-bit random number is drawn and neuron i
// spikes when its top 8 bits are below the intensity, i.e. with probability
// intensity/256 (Bernoulli rate coding). Spiking neurons leave on the out_*
// valid/ready stream as their neuron id (input neurons are ids 0..n_in-1).
//
// The paper says only that static inputs are turned into spike trains by
// following some probability distribution; the Bernoulli coding, the 8-bit
// intensity and the in-order sweep are this design's choices.
//
// Timing: one input neuron per cycle while the stream is not stalled, so a
// sweep takes n_in cycles plus the cycles out_ready stays low. busy is high
// from the cycle after start until the sweep ends.
//
// Only the top 8 random bits are compared with the intensity; lint reports
// the other bits as unused.
module spike_injection
  import psp_pkg::*;
#(
  parameter int          N_IN_MAX = 1024,
  parameter logic [31:0] SEED     = 32'h1D87_2B41
) (
  input  logic             clk,
  input  logic             rst_n,
  // pixel memory write port (software)
  input  logic             pix_we,
  input  logic [15:0]      pix_addr,
  input  logic [PIX_W-1:0] pix_data,
  // control
  input  logic [15:0]      n_in,
  input  logic             start,
  output logic             busy,
  // spike stream
  output logic             out_valid,
  input  logic             out_ready,
  output neuron_id_t       out_id
);

  localparam int AW = $clog2(N_IN_MAX);

  logic [PIX_W-1:0] pix_mem [N_IN_MAX];
  logic [15:0]      idx;
  logic [31:0]      rnd;
  logic             spike;
  logic             advance;

  uniform_rng #(.SEED(SEED)) u_rng (
    .clk(clk), .rst_n(rst_n), .next(advance), .value(rnd)
  );

  always_ff @(posedge clk) begin
    if (pix_we && pix_addr < 16'(N_IN_MAX)) pix_mem[pix_addr[AW-1:0]] <= pix_data;
  end

  assign spike     = busy && (rnd[31:24] < pix_mem[idx[AW-1:0]]);
  assign out_valid = spike;
  assign out_id    = neuron_id_t'(idx);
  assign advance   = busy && (!spike || out_ready);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      idx  <= '0;
    end else if (!busy) begin
      if (start && n_in != 16'd0) begin
        busy <= 1'b1;
        idx  <= '0;
      end
    end else if (advance) begin
      if (idx == n_in - 16'd1) busy <= 1'b0;
      idx <= idx + 16'd1;
    end
  end

  initial assert (N_IN_MAX >= 2) else $error("spike_injection: N_IN_MAX too small");
  a_nin: assert property (@(posedge clk) disable iff (!rst_n) start |-> n_in <= 16'(N_IN_MAX));

endmodule
