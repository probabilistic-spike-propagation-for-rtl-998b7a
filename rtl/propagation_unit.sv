// propagation_unit: probabilistic spike propagation with early termination.
//
// For every spike taken from the queue, and for each of the spiking neuron's
// two sorted outgoing lists (excitatory, then inhibitory), the unit
//   1. reads the list descriptor and its 5-segment PWL model (on-chip tables),
//   2. draws r uniformly from [0, |w_hat|) and turns it into the termination
//      point termpt with pwl_termpt,
//   3. streams the first termpt target ids of the sorted list: positions below
//      onc_len from the on-chip index memory, one per cycle, and the remaining
//      ones with one burst read of (termpt - onc_len) ids from off-chip memory,
//   4. sends every target an update of weight w_hat (w_i^max for excitatory,
//      w_i^min for inhibitory lists).
// A target thus receives w_hat with probability |w_ij| / |w_hat|, so the
// expected input equals the deterministic one, while the tail of each list,
// where weights are small, is rarely read (paper Sec. 2.1-2.2, Alg. 2 with the
// PWL termination point). Synaptic weights themselves are never read here.
//
// Tables (software writes them through cfg_*, see psp_pkg::cfg_sel_e):
// descriptor table of 2*N_NEURONS desc_t and PWL table of 2*N_NEURONS x 5
// segments, both with combinational read. Their layout is this design's choice.
//
// Interfaces: spk_* valid/ready spike input; onc_rd_* registered-read port of
// the on-chip index memory; off_req_* valid/ready burst request (address of
// the first id, number of ids) and off_r* one id per cycle in order, at the
// earliest the cycle after the request is accepted, with no back-pressure;
// upd_* one update per cycle, no back-pressure (the evaluation unit takes one
// update every cycle).
//
// Timing per list with n_max > 0: 1 cycle descriptor, 2 cycles PWL, 1 cycle
// dispatch, then n_on cycles of on-chip reads and, if needed, the off-chip
// burst; 1 cycle to switch polarity or return to idle.
//
// Lint notes: the configuration word is wider than a descriptor, the upper
// identifier bits beyond the table size are not needed, only the upper 16
// random bits feed the threshold, and the threshold itself (r) is produced by
// the termination-point unit for observation only.
module propagation_unit
  import psp_pkg::*;
#(
  parameter int          N_NEURONS = 4096,
  parameter logic [31:0] SEED      = 32'h7F4A_7C15
) (
  input  logic             clk,
  input  logic             rst_n,
  // configuration (software)
  input  logic             cfg_we,
  input  cfg_sel_e         cfg_sel,
  input  logic [31:0]      cfg_addr,
  input  logic [CFG_W-1:0] cfg_wdata,
  // spikes from the queue
  input  logic             spk_valid,
  output logic             spk_ready,
  input  neuron_id_t       spk_id,
  // on-chip index memory read port
  output logic             onc_rd_en,
  output addr_t            onc_rd_addr,
  input  neuron_id_t       onc_rd_data,
  // off-chip index memory burst read
  output logic             off_req_valid,
  input  logic             off_req_ready,
  output addr_t            off_req_addr,
  output pos_t             off_req_len,
  input  logic             off_rvalid,
  input  neuron_id_t       off_rdata,
  // weight updates to evaluation
  output logic             upd_valid,
  output update_t          upd,
  output logic             busy,
  // statistics
  output logic [31:0]      st_lists,      // lists processed (n_max > 0)
  output logic [31:0]      st_onc_reads,  // on-chip index reads
  output logic [31:0]      st_off_reads,  // off-chip index reads
  output logic [31:0]      st_off_bursts, // off-chip burst requests
  output logic [31:0]      st_early       // lists ended before n_max
);

  localparam int NP  = 2 * N_NEURONS;
  localparam int PAW = $clog2(NP);

  typedef enum logic [2:0] {S_IDLE, S_DESC, S_WAIT, S_ONC, S_OFFREQ, S_OFFDATA, S_NEXT} state_e;

  desc_t     desc_mem [NP];
  pwl_seg_t  pwl_mem  [NP][NSEG];

  state_e    state;
  neuron_id_t id_q;
  polarity_e pol;
  desc_t     desc_q;
  pos_t      n_on, n_off, cnt;
  logic      onc_pend;
  logic [31:0] rnd;
  logic      t_valid;
  pos_t      termpt;
  logic [W_W-1:0] r_used;
  logic [PAW-1:0] pair;
  desc_t     desc_rd;
  logic [W_W-1:0] mag;
  logic      start_t;
  pos_t      n_on_c;

  // configuration writes
  always_ff @(posedge clk) begin
    if (cfg_we && cfg_sel == CFG_DESC && cfg_addr < 32'(NP))
      desc_mem[cfg_addr[PAW-1:0]] <= desc_t'(cfg_wdata[$bits(desc_t)-1:0]);
    if (cfg_we && cfg_sel == CFG_PWL && (cfg_addr >> 3) < 32'(NP) && cfg_addr[2:0] < 3'(NSEG))
      pwl_mem[cfg_addr[PAW+2:3]][cfg_addr[2:0]] <= pwl_seg_t'(cfg_wdata[$bits(pwl_seg_t)-1:0]);
  end

  assign pair    = {id_q[PAW-2:0], pol};
  assign desc_rd = desc_mem[pair];
  assign mag     = desc_rd.w_hat[W_W-1] ? W_W'(-desc_rd.w_hat) : W_W'(desc_rd.w_hat);
  assign start_t = (state == S_DESC) && (desc_rd.n_max != '0);

  uniform_rng #(.SEED(SEED)) u_rng (
    .clk(clk), .rst_n(rst_n), .next(start_t), .value(rnd)
  );

  pwl_termpt u_termpt (
    .clk(clk), .rst_n(rst_n),
    .in_valid(start_t), .rnd(rnd[31:16]), .mag(mag), .n_max(desc_rd.n_max),
    .segs(pwl_mem[pair]),
    .out_valid(t_valid), .termpt(termpt), .r_out(r_used)
  );

  assign n_on_c = (termpt < desc_q.onc_len) ? termpt : desc_q.onc_len;

  assign spk_ready     = (state == S_IDLE);
  assign onc_rd_en     = (state == S_ONC);
  assign onc_rd_addr   = desc_q.onc_base + addr_t'(cnt);
  assign off_req_valid = (state == S_OFFREQ);
  assign off_req_addr  = desc_q.off_base;
  assign off_req_len   = n_off;

  assign upd_valid  = onc_pend || (state == S_OFFDATA && off_rvalid);
  assign upd.target = onc_pend ? onc_rd_data : off_rdata;
  assign upd.weight = desc_q.w_hat;
  assign busy       = (state != S_IDLE) || onc_pend;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      pol           <= POL_EXC;
      onc_pend      <= 1'b0;
      cnt           <= '0;
      n_on          <= '0;
      n_off         <= '0;
      id_q          <= '0;
      st_lists      <= '0;
      st_onc_reads  <= '0;
      st_off_reads  <= '0;
      st_off_bursts <= '0;
      st_early      <= '0;
    end else begin
      onc_pend <= (state == S_ONC);
      unique case (state)
        S_IDLE: if (spk_valid) begin
          id_q  <= spk_id;
          pol   <= POL_EXC;
          state <= S_DESC;
        end
        S_DESC: begin
          desc_q <= desc_rd;
          state  <= (desc_rd.n_max == '0) ? S_NEXT : S_WAIT;
        end
        S_WAIT: if (t_valid) begin
          st_lists <= st_lists + 32'd1;
          if (termpt < desc_q.n_max) st_early <= st_early + 32'd1;
          n_on  <= n_on_c;
          n_off <= termpt - n_on_c;
          cnt   <= '0;
          if (n_on_c != '0)        state <= S_ONC;
          else if (termpt != '0)   state <= S_OFFREQ;
          else                     state <= S_NEXT;
        end
        S_ONC: begin
          st_onc_reads <= st_onc_reads + 32'd1;
          cnt <= cnt + 1'b1;
          if (cnt == n_on - 1'b1) state <= (n_off != '0) ? S_OFFREQ : S_NEXT;
        end
        S_OFFREQ: if (off_req_ready) begin
          st_off_bursts <= st_off_bursts + 32'd1;
          cnt   <= '0;
          state <= S_OFFDATA;
        end
        S_OFFDATA: if (off_rvalid) begin
          st_off_reads <= st_off_reads + 32'd1;
          cnt <= cnt + 1'b1;
          if (cnt == n_off - 1'b1) state <= S_NEXT;
        end
        S_NEXT: begin
          if (pol == POL_EXC) begin
            pol   <= POL_INH;
            state <= S_DESC;
          end else begin
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  initial assert (N_NEURONS >= 2 && (1 << $clog2(N_NEURONS)) == N_NEURONS)
    else $error("propagation_unit: N_NEURONS must be a power of two");
  a_spk_range: assert property (@(posedge clk) disable iff (!rst_n)
    spk_valid && spk_ready |-> 32'(spk_id) < 32'(N_NEURONS));

endmodule
