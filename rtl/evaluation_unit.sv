// evaluation_unit: integrate-and-fire neuron evaluation.
//
// Holds the membrane potential of every neuron (the "neuron data" on-chip
// memory) and does two jobs, never at the same time:
//   * integrate: every update (target j, weight w) from propagation adds w to
//     V[j] in the cycle it arrives; the sum saturates at the limits of the
//     V_W-bit signed range.
//   * evaluate: a sweep over the neurons [sweep_lo, sweep_hi), run once at the
//     end of each timestep, fires every neuron with V >= v_th and resets its
//     potential to 0. A fired neuron below out_base is sent on the spike
//     stream to the queue for the next timestep; a fired neuron at or above
//     out_base belongs to the final layer and instead increments its spike
//     counter, which software reads through cnt_rd_*.
// A clear pulse zeroes all potentials (one neuron per cycle) and all output
// counters, before a new input is presented.
//
// The integrate-and-fire model, reset on firing and the final-layer spike
// counts follow the paper. Evaluating the threshold once per timestep after all
// updates, reset to zero rather than by subtraction, saturation and all widths
// are this design's choices. With one firing per neuron and timestep, the
// next-timestep queue never needs more entries than there are neurons.
//
// Timing: one update per cycle, no back-pressure; a sweep takes
// sweep_hi - sweep_lo cycles plus cycles stalled on spk_ready; a clear takes
// N_NEURONS cycles. busy covers sweep and clear.
module evaluation_unit
  import psp_pkg::*;
#(
  parameter int N_NEURONS = 4096,
  parameter int N_OUT_MAX = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        upd_valid,
  input  update_t     upd,
  input  potential_t  v_th,
  input  neuron_id_t  out_base,
  input  logic        clear,
  input  logic        sweep_start,
  input  neuron_id_t  sweep_lo,
  input  neuron_id_t  sweep_hi,
  output logic        busy,
  output logic        spk_valid,
  input  logic        spk_ready,
  output neuron_id_t  spk_id,
  input  logic [7:0]  cnt_rd_addr,
  output logic [31:0] cnt_rd_data,
  output logic [31:0] st_fired,       // all firings, queued or counted
  output logic [31:0] st_saturated    // updates that hit a saturation limit
);

  localparam int AW  = $clog2(N_NEURONS);
  localparam int OAW = $clog2(N_OUT_MAX);
  localparam potential_t V_MAX = {1'b0, {(V_W-1){1'b1}}};
  localparam potential_t V_MIN = {1'b1, {(V_W-1){1'b0}}};

  typedef enum logic [1:0] {E_IDLE, E_SWEEP, E_CLEAR} state_e;

  potential_t  vmem [N_NEURONS];
  logic [31:0] out_cnt [N_OUT_MAX];
  state_e      state;
  neuron_id_t  idx, hi_q;
  potential_t  v_cur;
  logic        fire, is_out, advance;
  logic [V_W:0] sum;
  logic        sat_hi, sat_lo;
  neuron_id_t  out_off;

  // integrate
  assign sum    = {vmem[upd.target[AW-1:0]][V_W-1], vmem[upd.target[AW-1:0]]}
                + (V_W+1)'(upd.weight);
  assign sat_hi = (sum[V_W:V_W-1] == 2'b01);
  assign sat_lo = (sum[V_W:V_W-1] == 2'b10);

  // evaluate
  assign v_cur     = vmem[idx[AW-1:0]];
  assign fire      = (state == E_SWEEP) && (v_cur >= v_th);
  assign is_out    = (idx >= out_base);
  assign out_off   = idx - out_base;
  assign spk_valid = fire && !is_out;
  assign spk_id    = idx;
  assign advance   = (state == E_SWEEP) && (!fire || is_out || spk_ready);
  assign busy      = (state != E_IDLE);

  assign cnt_rd_data = (32'(cnt_rd_addr) < 32'(N_OUT_MAX)) ? out_cnt[cnt_rd_addr[OAW-1:0]] : '0;

  always_ff @(posedge clk) begin
    if (state == E_CLEAR) begin
      vmem[idx[AW-1:0]] <= '0;
    end else if (state == E_SWEEP) begin
      if (advance && fire) vmem[idx[AW-1:0]] <= '0;
    end else if (upd_valid) begin
      vmem[upd.target[AW-1:0]] <= sat_hi ? V_MAX : sat_lo ? V_MIN : sum[V_W-1:0];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state        <= E_IDLE;
      idx          <= '0;
      hi_q         <= '0;
      st_fired     <= '0;
      st_saturated <= '0;
      for (int o = 0; o < N_OUT_MAX; o++) out_cnt[o] <= '0;
    end else begin
      if (upd_valid && state == E_IDLE && (sat_hi || sat_lo))
        st_saturated <= st_saturated + 32'd1;
      unique case (state)
        E_IDLE: begin
          if (clear) begin
            state <= E_CLEAR;
            idx   <= '0;
            for (int o = 0; o < N_OUT_MAX; o++) out_cnt[o] <= '0;
          end else if (sweep_start && sweep_lo < sweep_hi) begin
            state <= E_SWEEP;
            idx   <= sweep_lo;
            hi_q  <= sweep_hi;
          end
        end
        E_SWEEP: if (advance) begin
          if (fire) begin
            st_fired <= st_fired + 32'd1;
            if (is_out && 32'(out_off) < 32'(N_OUT_MAX))
              out_cnt[out_off[OAW-1:0]] <= out_cnt[out_off[OAW-1:0]] + 32'd1;
          end
          if (idx == hi_q - 1'b1) state <= E_IDLE;
          idx <= idx + 1'b1;
        end
        E_CLEAR: begin
          if (idx == neuron_id_t'(N_NEURONS - 1)) state <= E_IDLE;
          idx <= idx + 1'b1;
        end
        default: state <= E_IDLE;
      endcase
    end
  end

  a_no_upd_when_busy: assert property (@(posedge clk) disable iff (!rst_n) upd_valid |-> state == E_IDLE)
    else $error("evaluation_unit: update arrived during a sweep or clear");
  a_upd_range: assert property (@(posedge clk) disable iff (!rst_n)
    upd_valid |-> 32'(upd.target) < 32'(N_NEURONS));
  a_hi_range: assert property (@(posedge clk) disable iff (!rst_n)
    sweep_start |-> 32'(sweep_hi) <= 32'(N_NEURONS));

endmodule
