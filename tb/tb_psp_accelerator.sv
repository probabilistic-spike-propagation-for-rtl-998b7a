// tb_psp_accelerator: end-to-end test of the accelerator at its default
// size, with an off-chip memory model. A 100-40-10 network (inputs 0..99,
// hidden 100..139, outputs 140..149) is loaded through the configuration
// port; every neuron has an excitatory and an inhibitory sorted list, split
// between on-chip and off-chip storage in different ways.
//   A. Flat lists (all weights of a list equal): every spike reaches its whole
//      list, so the run is deterministic; output spike counts, injected and
//      re-queued spike counts and index reads are compared with a reference
//      model that replays the input random sequence and the timestep order.
//   B. Lists with a falling (quadratic) weight profile: spikes stop early.
//      The number of updates per list is compared with sum(w)/w_max, the
//      expectation of the scheme, and the index reads with the deterministic
//      count (memory accesses per spike), including the off-chip share.
//   C. Flat lists with extreme weights and an unreachable threshold: the
//      potentials saturate; the reference model saturates the same way.
// Every mechanism (injection, re-queueing, queue contention, on-chip reads,
// off-chip bursts, early termination, inhibitory updates, saturation,
// final-layer counting) must have occurred at least once.
module tb_psp_accelerator;
  import psp_pkg::*;
  import psp_ref_pkg::*;

  localparam int NI = 100, NH = 40, NO = 10;
  localparam int HB = NI, OB = NI + NH, NT = NI + NH + NO;
  localparam logic [31:0] INJ_SEED = 32'h1D87_2B41;   // spike_injection default
  localparam longint VMAX = (1 << (V_W - 1)) - 1;
  localparam longint VMIN = -(1 << (V_W - 1));

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  cfg_sel_e cfg_sel = CFG_PIXEL;
  logic [31:0] cfg_addr = 0;
  logic [CFG_W-1:0] cfg_wdata = 0;
  logic [15:0] n_in = NI;
  neuron_id_t out_base = OB, n_total = NT;
  potential_t v_th = 1000;
  logic [15:0] num_steps = 0;
  logic start = 0, busy, done;
  logic [15:0] step_count;
  logic [7:0] cnt_rd_addr = 0;
  logic [31:0] cnt_rd_data;
  logic off_req_valid, off_req_ready, off_rvalid;
  addr_t off_req_addr;
  pos_t off_req_len;
  neuron_id_t off_rdata;
  logic [31:0] st_injected, st_requeued, st_propagated, st_updates, st_lists, st_onc_reads,
               st_off_reads, st_off_bursts, st_early, st_fired, st_saturated, st_contention;
  logic off_we = 0;
  addr_t off_waddr = 0;
  neuron_id_t off_wdata = 0;

  int checks = 0, failures = 0;

  psp_accelerator dut (.*);

  offchip_mem_model #(.LATENCY(8)) u_off (
    .clk(clk), .rst_n(rst_n), .we(off_we), .waddr(off_waddr), .wdata(off_wdata),
    .req_valid(off_req_valid), .req_ready(off_req_ready), .req_addr(off_req_addr),
    .req_len(off_req_len), .rvalid(off_rvalid), .rdata(off_rdata));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- network
  int        len  [2*NT];
  int        onl  [2*NT];
  int        tgt  [2*NT][];
  int        mg   [2*NT][];     // sorted magnitudes
  weight_t   what [2*NT];
  logic [7:0] pix [NI];
  int        onc_ptr, off_ptr;

  // observed mechanisms
  int inh_updates = 0, exc_updates = 0;
  always @(posedge clk) if (rst_n && dut.upd_valid) begin
    if (dut.upd.weight < 0) inh_updates++; else exc_updates++;
  end
  // spikes actually propagated, for the statistics of part B
  int prop_ids [$];
  always @(posedge clk) if (rst_n && dut.q_valid && dut.q_ready) prop_ids.push_back(int'(dut.q_id));

  task automatic cfg_write(input cfg_sel_e sel, input int addr, input logic [CFG_W-1:0] data);
    cfg_we = 1; cfg_sel = sel; cfg_addr = 32'(addr); cfg_wdata = data;
    @(negedge clk);
    cfg_we = 0;
  endtask

  // mode 0: flat lists, mode 1: quadratic fall, mode 2: flat extreme weights
  task automatic build_and_load(input int mode);
    desc_t d;
    pwl_seg_t segs [NSEG];
    onc_ptr = 0; off_ptr = 0;
    for (int pr = 0; pr < 2 * NT; pr++) begin
      automatic int id = pr / 2, p = pr % 2, m = 0, lo = 0, span = 1;
      if (id < HB)      begin len[pr] = p ? 5 : 24; lo = HB; span = NH; m = p ? 200 : 300; end
      else if (id < OB) begin len[pr] = p ? 3 : 6;  lo = OB; span = NO; m = p ? 150 : 400; end
      else              len[pr] = 0;
      if (mode == 2) m = p ? 32768 : 32767;
      tgt[pr] = new[len[pr] > 0 ? len[pr] : 1];
      mg[pr]  = new[len[pr] > 0 ? len[pr] : 1];
      for (int j = 0; j < len[pr]; j++) begin
        tgt[pr][j] = lo + (id * 7 + j * 3 + p) % span;
        if (mode == 1) mg[pr][j] = m - (m * j * (2 * len[pr] - j)) / (len[pr] * len[pr]) + 1;
        else           mg[pr][j] = m;
      end
      // on-chip split: 40% of each list, whole list, or none
      case (id % 3)
        0: onl[pr] = (len[pr] * 2) / 5;
        1: onl[pr] = len[pr];
        default: onl[pr] = 0;
      endcase
      what[pr] = p ? weight_t'(-m) : weight_t'(m);
      d.n_max = pos_t'(len[pr]); d.w_hat = what[pr]; d.onc_len = pos_t'(onl[pr]);
      d.onc_base = addr_t'(onc_ptr); d.off_base = addr_t'(off_ptr);
      cfg_write(CFG_DESC, pr, CFG_W'(d));
      if (len[pr] > 0) begin
        pwl_fit(mg[pr], len[pr], segs);
        for (int s = 0; s < NSEG; s++) cfg_write(CFG_PWL, 8 * pr + s, CFG_W'(segs[s]));
      end
      for (int j = 0; j < len[pr]; j++) begin
        if (j < onl[pr]) begin
          cfg_write(CFG_ONC, onc_ptr, CFG_W'(tgt[pr][j]));
          onc_ptr++;
        end else begin
          off_we = 1; off_waddr = addr_t'(off_ptr); off_wdata = neuron_id_t'(tgt[pr][j]);
          @(negedge clk);
          off_we = 0;
          off_ptr++;
        end
      end
    end
  endtask

  // ------------------------------------------------------- reference model
  longint vref [NT];
  int     cnt_ref [NO];
  longint inj_ref, req_ref, onc_ref, off_ref, sat_ref;

  function automatic longint sat(input longint v);
    if (v > VMAX) begin sat_ref++; return VMAX; end
    if (v < VMIN) begin sat_ref++; return VMIN; end
    return v;
  endfunction

  // deterministic run (every list reached in full)
  task automatic golden(input int steps, input longint th, input logic [31:0] seed0);
    automatic logic [31:0] rs = seed0;
    int q [$];
    int fired [$];
    foreach (vref[i]) vref[i] = 0;
    foreach (cnt_ref[i]) cnt_ref[i] = 0;
    inj_ref = 0; req_ref = 0; onc_ref = 0; off_ref = 0; sat_ref = 0;
    fired.delete();
    for (int s = 0; s < steps; s++) begin
      // end of previous step: evaluation of all non-input neurons
      q.delete();
      if (s > 0)
        for (int i = NI; i < NT; i++) if (vref[i] >= th) begin
          vref[i] = 0;
          if (i >= OB) cnt_ref[i - OB]++; else begin q.push_back(i); req_ref++; end
        end
      for (int i = 0; i < NI; i++) begin
        if (rs[31:24] < pix[i]) begin q.push_back(i); inj_ref++; end
        rs = xorshift32(rs);
      end
      foreach (q[k]) for (int p = 0; p < 2; p++) begin
        automatic int pr = 2 * q[k] + p;
        for (int j = 0; j < len[pr]; j++) vref[tgt[pr][j]] = sat(vref[tgt[pr][j]] + longint'(what[pr]));
        onc_ref += onl[pr];
        off_ref += len[pr] - onl[pr];
      end
    end
    for (int i = OB; i < NT; i++) if (vref[i] >= th) begin vref[i] = 0; cnt_ref[i - OB]++; end
  endtask

  task automatic run(input int steps, output int cycles);
    num_steps = 16'(steps);
    start = 1;
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  logic [31:0] inj_seed;
  int cyc;
  int mech_requeue = 0, mech_contention = 0, mech_onc = 0, mech_off = 0, mech_early = 0,
      mech_sat = 0, mech_count = 0, mech_inject = 0;

  initial begin
    logic [31:0] s0_inj, s0_req, s0_onc, s0_off, s0_bursts, s0_lists, s0_early, s0_upd, s0_sat, s0_cont;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    for (int i = 0; i < NI; i++) begin
      pix[i] = 8'($urandom_range(0, 255));
      cfg_write(CFG_PIXEL, i, CFG_W'(pix[i]));
    end
    inj_seed = INJ_SEED;

    // ---------------------------------------------------------------- A
    build_and_load(0);
    v_th = 1000;
    golden(12, 1000, inj_seed);
    run(12, cyc);
    $display("part A: %0d cycles, injected %0d, requeued %0d, updates %0d", cyc, st_injected, st_requeued, st_updates);
    check(step_count == 16'd12, "A: timestep count");
    check(longint'(st_injected) == inj_ref, $sformatf("A: injected %0d vs %0d", st_injected, inj_ref));
    check(longint'(st_requeued) == req_ref, $sformatf("A: requeued %0d vs %0d", st_requeued, req_ref));
    check(longint'(st_onc_reads) == onc_ref, $sformatf("A: onc reads %0d vs %0d", st_onc_reads, onc_ref));
    check(longint'(st_off_reads) == off_ref, $sformatf("A: off reads %0d vs %0d", st_off_reads, off_ref));
    check(st_early == 0, "A: flat lists never end early");
    for (int o = 0; o < NO; o++) begin
      cnt_rd_addr = 8'(o); #1;
      check(cnt_rd_data == 32'(cnt_ref[o]), $sformatf("A: output %0d count %0d vs %0d", o, cnt_rd_data, cnt_ref[o]));
      if (cnt_ref[o] > 0) mech_count++;
    end
    for (int i = NI; i < NT; i++)
      check(longint'(dut.u_eval.vmem[i]) == vref[i],
            $sformatf("A: potential %0d: %0d vs %0d", i, dut.u_eval.vmem[i], vref[i]));
    // the next run restarts the input sequence where this one stopped
    for (int s = 0; s < 12 * NI; s++) inj_seed = xorshift32(inj_seed);
    mech_inject += st_injected; mech_requeue += st_requeued; mech_onc += st_onc_reads;
    mech_off += st_off_bursts;

    // ---------------------------------------------------------------- B
    @(negedge clk);
    s0_inj = st_injected; s0_req = st_requeued; s0_onc = st_onc_reads; s0_off = st_off_reads;
    s0_bursts = st_off_bursts; s0_lists = st_lists; s0_early = st_early; s0_upd = st_updates;
    build_and_load(1);
    prop_ids.delete();
    v_th = 1000;
    run(30, cyc);
    for (int s = 0; s < 30 * NI; s++) inj_seed = xorshift32(inj_seed);
    begin
      real exp_upd, det_reads, got_reads, off_share;
      exp_upd = 0; det_reads = 0;
      foreach (prop_ids[k]) for (int p = 0; p < 2; p++) begin
        automatic int pr = 2 * prop_ids[k] + p;
        real sw;
        sw = 0;
        for (int j = 0; j < len[pr]; j++) sw += real'(mg[pr][j]);
        if (len[pr] > 0) exp_upd += sw / real'(mg[pr][0]);
        det_reads += real'(len[pr]);
      end
      got_reads = real'((st_onc_reads - s0_onc) + (st_off_reads - s0_off));
      off_share = real'(st_off_reads - s0_off) / det_reads;
      $display("part B: %0d cycles, %0d spikes, updates %0d (expected about %0.0f), index reads %0.0f of %0.0f deterministic, off-chip %0.3f",
               cyc, prop_ids.size(), st_updates - s0_upd, exp_upd, got_reads, det_reads, off_share);
      check(prop_ids.size() > 100, "B: enough spikes for statistics");
      check(real'(st_updates - s0_upd) > 0.85 * exp_upd && real'(st_updates - s0_upd) < 1.15 * exp_upd,
            "B: updates per spike match sum(w)/w_max");
      check(got_reads == real'(st_updates - s0_upd), "B: one index read per update");
      check(got_reads < 0.6 * det_reads, "B: fewer index reads than the deterministic scheme");
      check(off_share < 0.4, "B: off-chip reads are a small share");
    end
    check(st_early > s0_early, "B: lists end early");
    mech_early += st_early - s0_early;
    mech_inject += st_injected - s0_inj; mech_requeue += st_requeued - s0_req;
    mech_onc += st_onc_reads - s0_onc; mech_off += st_off_bursts - s0_bursts;

    // ---------------------------------------------------------------- C
    @(negedge clk);
    s0_inj = st_injected; s0_req = st_requeued; s0_onc = st_onc_reads; s0_off = st_off_reads;
    s0_sat = st_saturated;
    build_and_load(2);
    v_th = potential_t'(VMAX);
    golden(16, VMAX, inj_seed);
    run(16, cyc);
    $display("part C: %0d cycles, saturated %0d", cyc, st_saturated - s0_sat);
    check(longint'(st_saturated - s0_sat) == sat_ref, $sformatf("C: saturations %0d vs %0d", st_saturated - s0_sat, sat_ref));
    check(longint'(st_injected - s0_inj) == inj_ref, "C: injected");
    check(longint'(st_requeued - s0_req) == req_ref, "C: requeued");
    for (int o = 0; o < NO; o++) begin
      cnt_rd_addr = 8'(o); #1;
      check(cnt_rd_data == 32'(cnt_ref[o]), $sformatf("C: output %0d count %0d vs %0d", o, cnt_rd_data, cnt_ref[o]));
    end
    mech_sat += st_saturated - s0_sat;
    mech_contention = st_contention;

    // ------------------------------------------------------- mechanisms
    $display("mechanisms: inject %0d requeue %0d contention %0d onc %0d off-bursts %0d early %0d inh %0d sat %0d outputs %0d",
             mech_inject, mech_requeue, mech_contention, mech_onc, mech_off, mech_early, inh_updates, mech_sat, mech_count);
    check(mech_inject > 0, "mechanism: spike injection");
    check(mech_requeue > 0, "mechanism: evaluation spikes re-queued");
    check(mech_contention > 0, "mechanism: queue arbitration between producers");
    check(mech_onc > 0, "mechanism: on-chip index reads");
    check(mech_off > 0, "mechanism: off-chip bursts");
    check(mech_early > 0, "mechanism: early termination");
    check(inh_updates > 0 && exc_updates > 0, "mechanism: excitatory and inhibitory updates");
    check(mech_sat > 0, "mechanism: potential saturation");
    check(mech_count > 0, "mechanism: final-layer spike counting");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
