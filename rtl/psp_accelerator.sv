// psp_accelerator: spiking-network accelerator with probabilistic spike
// propagation (top level).
//
// Data path (one loop per timestep):
//   spike_injection --a--> queue_combiner --> propagation_unit --> evaluation_unit
//   evaluation_unit --b--> queue_combiner (spikes for the next timestep)
// propagation_unit reads the leading target ids of each sorted list from
// onc_index_mem and the remaining ids from off-chip memory, which sits outside
// this module behind the off_req_* / off_r* burst port. The evaluation unit
// keeps the potentials on chip and counts final-layer spikes for software.
//
// Neuron numbering: ids 0..n_in-1 are the input layer (injected, never
// evaluated), ids n_in..n_total-1 are evaluated, and ids out_base..n_total-1
// are the final layer (counted, not queued).
//
// Control: a start pulse clears all potentials and counters, then runs
// num_steps timesteps. Timestep s does
//   1. injection sweep of step s, and at the same time (s > 0) the evaluation
//      sweep that ends step s-1; both write the queue's write buffer,
//   2. swap of the queue buffers,
//   3. propagation of every queued spike into the potentials.
// After the last timestep only the final layer is evaluated, and done rises
// (it stays high until the next start). Software loads the tables beforehand
// through cfg_* (see psp_pkg::cfg_sel_e) and reads counts through cnt_rd_*.
//
// The block structure follows the paper's accelerator figure; the timestep
// sequencing, the overlap of injection with evaluation and all interfaces
// are this design's choices.
//
// The queue's write-buffer fill level is not used by the controller (the
// queue holds one entry per neuron and cannot overflow); lint reports it as
// unused.
module psp_accelerator
  import psp_pkg::*;
#(
  parameter int N_NEURONS   = 4096,
  parameter int N_IN_MAX    = 1024,
  parameter int N_OUT_MAX   = 16,
  parameter int ONC_DEPTH   = 524288,
  parameter int QUEUE_DEPTH = N_NEURONS
) (
  input  logic             clk,
  input  logic             rst_n,
  // software: configuration writes
  input  logic             cfg_we,
  input  cfg_sel_e         cfg_sel,
  input  logic [31:0]      cfg_addr,
  input  logic [CFG_W-1:0] cfg_wdata,
  // software: run parameters (hold stable while busy)
  input  logic [15:0]      n_in,
  input  neuron_id_t       out_base,
  input  neuron_id_t       n_total,
  input  potential_t       v_th,
  input  logic [15:0]      num_steps,
  input  logic             start,
  output logic             busy,
  output logic             done,
  output logic [15:0]      step_count,
  // software: final layer spike counts
  input  logic [7:0]       cnt_rd_addr,
  output logic [31:0]      cnt_rd_data,
  // off-chip index memory
  output logic             off_req_valid,
  input  logic             off_req_ready,
  output addr_t            off_req_addr,
  output pos_t             off_req_len,
  input  logic             off_rvalid,
  input  neuron_id_t       off_rdata,
  // statistics
  output logic [31:0]      st_injected,
  output logic [31:0]      st_requeued,
  output logic [31:0]      st_propagated,
  output logic [31:0]      st_updates,
  output logic [31:0]      st_lists,
  output logic [31:0]      st_onc_reads,
  output logic [31:0]      st_off_reads,
  output logic [31:0]      st_off_bursts,
  output logic [31:0]      st_early,
  output logic [31:0]      st_fired,
  output logic [31:0]      st_saturated,
  output logic [31:0]      st_contention
);

  typedef enum logic [3:0] {
    C_IDLE, C_CLEAR_GO, C_CLEAR_WAIT, C_STEP_GO, C_STEP_WAIT, C_SWAP, C_PROP,
    C_FINAL_GO, C_FINAL_WAIT
  } ctrl_e;

  ctrl_e      cs;
  logic       inj_start, inj_busy, inj_valid, inj_ready;
  neuron_id_t inj_id;
  logic       ev_clear, ev_sweep, ev_busy, ev_spk_valid, ev_spk_ready;
  neuron_id_t ev_spk_id, sweep_lo;
  logic       q_swap, q_valid, q_ready;
  neuron_id_t q_id;
  logic       onc_rd_en;
  addr_t      onc_rd_addr;
  neuron_id_t onc_rd_data;
  logic       upd_valid, prop_busy;
  update_t    upd;
  logic [31:0] q_wr_count;

  spike_injection #(.N_IN_MAX(N_IN_MAX)) u_inj (
    .clk(clk), .rst_n(rst_n),
    .pix_we(cfg_we && cfg_sel == CFG_PIXEL), .pix_addr(cfg_addr[15:0]),
    .pix_data(cfg_wdata[PIX_W-1:0]),
    .n_in(n_in), .start(inj_start), .busy(inj_busy),
    .out_valid(inj_valid), .out_ready(inj_ready), .out_id(inj_id)
  );

  queue_combiner #(.DEPTH(QUEUE_DEPTH)) u_queue (
    .clk(clk), .rst_n(rst_n),
    .a_valid(inj_valid), .a_ready(inj_ready), .a_id(inj_id),
    .b_valid(ev_spk_valid), .b_ready(ev_spk_ready), .b_id(ev_spk_id),
    .swap(q_swap),
    .out_valid(q_valid), .out_ready(q_ready), .out_id(q_id),
    .wr_count(q_wr_count), .contention(st_contention)
  );

  onc_index_mem #(.DEPTH(ONC_DEPTH)) u_onc (
    .clk(clk),
    .we(cfg_we && cfg_sel == CFG_ONC), .wr_addr(cfg_addr), .wr_data(cfg_wdata[ID_W-1:0]),
    .rd_en(onc_rd_en), .rd_addr(onc_rd_addr), .rd_data(onc_rd_data)
  );

  propagation_unit #(.N_NEURONS(N_NEURONS)) u_prop (
    .clk(clk), .rst_n(rst_n),
    .cfg_we(cfg_we), .cfg_sel(cfg_sel), .cfg_addr(cfg_addr), .cfg_wdata(cfg_wdata),
    .spk_valid(q_valid), .spk_ready(q_ready), .spk_id(q_id),
    .onc_rd_en(onc_rd_en), .onc_rd_addr(onc_rd_addr), .onc_rd_data(onc_rd_data),
    .off_req_valid(off_req_valid), .off_req_ready(off_req_ready),
    .off_req_addr(off_req_addr), .off_req_len(off_req_len),
    .off_rvalid(off_rvalid), .off_rdata(off_rdata),
    .upd_valid(upd_valid), .upd(upd), .busy(prop_busy),
    .st_lists(st_lists), .st_onc_reads(st_onc_reads), .st_off_reads(st_off_reads),
    .st_off_bursts(st_off_bursts), .st_early(st_early)
  );

  evaluation_unit #(.N_NEURONS(N_NEURONS), .N_OUT_MAX(N_OUT_MAX)) u_eval (
    .clk(clk), .rst_n(rst_n),
    .upd_valid(upd_valid), .upd(upd), .v_th(v_th), .out_base(out_base),
    .clear(ev_clear), .sweep_start(ev_sweep), .sweep_lo(sweep_lo), .sweep_hi(n_total),
    .busy(ev_busy), .spk_valid(ev_spk_valid), .spk_ready(ev_spk_ready), .spk_id(ev_spk_id),
    .cnt_rd_addr(cnt_rd_addr), .cnt_rd_data(cnt_rd_data),
    .st_fired(st_fired), .st_saturated(st_saturated)
  );

  // timestep controller
  assign inj_start = (cs == C_STEP_GO);
  assign ev_clear  = (cs == C_CLEAR_GO);
  assign ev_sweep  = (cs == C_STEP_GO && step_count != 16'd0) || (cs == C_FINAL_GO);
  assign sweep_lo  = (cs == C_FINAL_GO) ? out_base : neuron_id_t'(n_in);
  assign q_swap    = (cs == C_SWAP);
  assign busy      = (cs != C_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cs            <= C_IDLE;
      done          <= 1'b0;
      step_count    <= '0;
      st_injected   <= '0;
      st_requeued   <= '0;
      st_propagated <= '0;
      st_updates    <= '0;
    end else begin
      if (inj_valid && inj_ready)       st_injected   <= st_injected + 32'd1;
      if (ev_spk_valid && ev_spk_ready) st_requeued   <= st_requeued + 32'd1;
      if (q_valid && q_ready)           st_propagated <= st_propagated + 32'd1;
      if (upd_valid)                    st_updates    <= st_updates + 32'd1;
      unique case (cs)
        C_IDLE: if (start && num_steps != 16'd0) begin
          done       <= 1'b0;
          step_count <= '0;
          cs         <= C_CLEAR_GO;
        end
        C_CLEAR_GO:   cs <= C_CLEAR_WAIT;
        C_CLEAR_WAIT: if (!ev_busy) cs <= C_STEP_GO;
        C_STEP_GO:    cs <= C_STEP_WAIT;
        C_STEP_WAIT:  if (!inj_busy && !ev_busy) cs <= C_SWAP;
        C_SWAP:       cs <= C_PROP;
        C_PROP: if (!q_valid && !prop_busy) begin
          step_count <= step_count + 16'd1;
          cs <= (step_count + 16'd1 == num_steps) ? C_FINAL_GO : C_STEP_GO;
        end
        C_FINAL_GO:   cs <= C_FINAL_WAIT;
        C_FINAL_WAIT: if (!ev_busy) begin
          done <= 1'b1;
          cs   <= C_IDLE;
        end
        default: cs <= C_IDLE;
      endcase
    end
  end

  a_nin: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> 32'(n_in) <= 32'(N_IN_MAX) && 32'(n_total) <= 32'(N_NEURONS) && out_base <= n_total);

endmodule
