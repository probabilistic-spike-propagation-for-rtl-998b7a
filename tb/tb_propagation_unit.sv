// tb_propagation_unit: loads random sorted synapse lists (random lengths,
// split at random points between the on-chip index memory and an off-chip
// memory model with latency) for both polarities of 16 neurons, sends random
// spikes and compares the exact update stream with a reference that replays
// the random sequence and the PWL termination rule: the first termpt targets
// of the excitatory list with w_max, then of the inhibitory list with w_min.
// Also checks the read/burst/early-termination counters and, for a neuron
// with a linearly falling list, that the mean number of updates per spike is
// close to sum(w)/w_max, the expected value of the probabilistic scheme.
module tb_propagation_unit;
  import psp_pkg::*;
  import psp_ref_pkg::*;
  localparam int N = 16;
  localparam logic [31:0] SEED = 32'h0BAD_5EED;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  cfg_sel_e cfg_sel = CFG_DESC;
  logic [31:0] cfg_addr = 0;
  logic [CFG_W-1:0] cfg_wdata = 0;
  logic spk_valid = 0, spk_ready;
  neuron_id_t spk_id = 0;
  logic onc_rd_en;
  addr_t onc_rd_addr;
  neuron_id_t onc_rd_data;
  logic off_req_valid, off_req_ready, off_rvalid;
  addr_t off_req_addr;
  pos_t off_req_len;
  neuron_id_t off_rdata;
  logic upd_valid, busy;
  update_t upd;
  logic [31:0] st_lists, st_onc_reads, st_off_reads, st_off_bursts, st_early;
  logic onc_we = 0, off_we = 0;
  addr_t onc_waddr = 0, off_waddr = 0;
  neuron_id_t onc_wdata = 0, off_wdata = 0;

  int checks = 0, failures = 0;

  propagation_unit #(.N_NEURONS(N), .SEED(SEED)) dut (.*);

  onc_index_mem #(.DEPTH(2048)) u_onc (
    .clk(clk), .we(onc_we), .wr_addr(onc_waddr), .wr_data(onc_wdata),
    .rd_en(onc_rd_en), .rd_addr(onc_rd_addr), .rd_data(onc_rd_data));

  offchip_mem_model #(.LATENCY(5)) u_off (
    .clk(clk), .rst_n(rst_n), .we(off_we), .waddr(off_waddr), .wdata(off_wdata),
    .req_valid(off_req_valid), .req_ready(off_req_ready), .req_addr(off_req_addr),
    .req_len(off_req_len), .rvalid(off_rvalid), .rdata(off_rdata));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // network description held by the testbench
  int        len   [2*N];
  int        onl   [2*N];
  int        wts   [2*N][];
  int        tgt   [2*N][];
  weight_t   what  [2*N];
  pwl_seg_t  segs  [2*N][NSEG];
  logic [31:0] rs;
  update_t   exp_q [$];
  int        got_n = 0;
  int        last_exc;
  longint    e_onc = 0, e_off = 0, e_bursts = 0, e_early = 0, e_lists = 0;

  task automatic cfg_write(input cfg_sel_e sel, input int addr, input logic [CFG_W-1:0] data);
    @(negedge clk);
    cfg_we = 1; cfg_sel = sel; cfg_addr = 32'(addr); cfg_wdata = data;
    @(negedge clk);
    cfg_we = 0;
  endtask

  // expected updates of one spike
  task automatic expect_spike(input int id, output int total);
    total = 0;
    last_exc = 0;
    for (int p = 0; p < 2; p++) begin
      int pr, mag;
      longint r, t;
      pr = 2 * id + p;
      if (len[pr] == 0) continue;
      mag = (p == 0) ? int'(what[pr]) : -int'(what[pr]);
      r = scaled_r(longint'(rs[31:16]), mag);
      rs = xorshift32(rs);
      t = pwl_ref(r, len[pr], segs[pr]);
      e_lists++;
      if (t < len[pr]) e_early++;
      if (t > onl[pr]) begin e_bursts++; e_off += t - onl[pr]; e_onc += onl[pr]; end
      else e_onc += t;
      for (int j = 0; j < t; j++) begin
        update_t u;
        u.target = neuron_id_t'(tgt[pr][j]);
        u.weight = what[pr];
        exp_q.push_back(u);
      end
      total += int'(t);
      if (p == 0) last_exc = int'(t);
    end
  endtask

  always @(posedge clk) if (rst_n && upd_valid) begin
    update_t e;
    got_n++;
    if (exp_q.size() == 0) check(0, "unexpected update");
    else begin
      e = exp_q.pop_front();
      if (upd != e) check(0, $sformatf("update %0d: got %0d/%0d expected %0d/%0d", got_n,
                                       upd.target, upd.weight, e.target, e.weight));
      else checks++;
    end
  end

  initial begin
    automatic int onc_ptr = 0, off_ptr = 0;
    desc_t d;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    // build lists; neuron 3 excitatory: linear 60-entry list, all on chip
    for (int pr = 0; pr < 2 * N; pr++) begin
      int m;
      len[pr] = (pr % 7 == 5) ? 0 : $urandom_range(1, 40);
      if (pr == 6) len[pr] = 60;
      m = $urandom_range(100, 30000);
      wts[pr] = new[len[pr] > 0 ? len[pr] : 1];
      tgt[pr] = new[len[pr] > 0 ? len[pr] : 1];
      for (int j = 0; j < len[pr]; j++) begin
        if (pr == 6) wts[pr][j] = m - (m * j) / 60;
        else if (j == 0) wts[pr][j] = m;
        else wts[pr][j] = wts[pr][j-1] - $urandom_range(0, m / 10);
        if (wts[pr][j] < 1) wts[pr][j] = 1;
        tgt[pr][j] = $urandom_range(0, N - 1);
      end
      if (len[pr] > 0) pwl_fit(wts[pr], len[pr], segs[pr]);
      what[pr] = (pr % 2 == 0) ? weight_t'(m) : weight_t'(-m);
      onl[pr]  = (pr == 6) ? 60 : $urandom_range(0, len[pr]);
      if (pr == 9) onl[pr] = 0;                      // whole list off chip
      d.n_max = pos_t'(len[pr]); d.w_hat = what[pr]; d.onc_len = pos_t'(onl[pr]);
      d.onc_base = addr_t'(onc_ptr); d.off_base = addr_t'(off_ptr);
      cfg_write(CFG_DESC, pr, CFG_W'(d));
      for (int s = 0; s < NSEG; s++) cfg_write(CFG_PWL, 8 * pr + s, CFG_W'(segs[pr][s]));
      for (int j = 0; j < len[pr]; j++) begin
        @(negedge clk);
        if (j < onl[pr]) begin onc_we = 1; onc_waddr = addr_t'(onc_ptr); onc_wdata = neuron_id_t'(tgt[pr][j]); onc_ptr++; end
        else begin off_we = 1; off_waddr = addr_t'(off_ptr); off_wdata = neuron_id_t'(tgt[pr][j]); off_ptr++; end
        @(negedge clk);
        onc_we = 0; off_we = 0;
      end
    end
    rs = SEED;
    // random spikes
    for (int n = 0; n < 300; n++) begin
      int id, tot;
      id = $urandom_range(0, N - 1);
      expect_spike(id, tot);
      @(negedge clk);
      spk_valid = 1; spk_id = neuron_id_t'(id);
      @(posedge clk);
      while (!spk_ready) @(posedge clk);
      @(negedge clk);
      spk_valid = 0;
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    // linear list of neuron 3: mean reach against sum(w)/w_max
    begin
      longint sumw, tot_all;
      tot_all = 0; sumw = 0;
      for (int j = 0; j < 60; j++) sumw += wts[6][j];
      for (int n = 0; n < 400; n++) begin
        int tot;
        expect_spike(3, tot);
        tot_all += last_exc;
        @(negedge clk);
        spk_valid = 1; spk_id = neuron_id_t'(3);
        @(posedge clk);
        while (!spk_ready) @(posedge clk);
        @(negedge clk);
        spk_valid = 0;
      end
      begin
        longint e_exc;
        e_exc = (sumw * 400) / wts[6][0];
        check(tot_all * 100 >= e_exc * 85 && tot_all * 100 <= e_exc * 115,
              $sformatf("linear list: %0d updates in 400 spikes, expected about %0d", tot_all, e_exc));
      end
    end
    while (busy || spk_valid) @(negedge clk);
    repeat (10) @(negedge clk);
    check(exp_q.size() == 0, $sformatf("%0d expected updates missing", exp_q.size()));
    check(longint'(st_lists) == e_lists, $sformatf("lists %0d vs %0d", st_lists, e_lists));
    check(longint'(st_onc_reads) == e_onc, $sformatf("onc reads %0d vs %0d", st_onc_reads, e_onc));
    check(longint'(st_off_reads) == e_off, $sformatf("off reads %0d vs %0d", st_off_reads, e_off));
    check(longint'(st_off_bursts) == e_bursts, $sformatf("bursts %0d vs %0d", st_off_bursts, e_bursts));
    check(longint'(st_early) == e_early, $sformatf("early %0d vs %0d", st_early, e_early));
    check(e_bursts > 0 && e_early > 0 && e_onc > 0, "all paths exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
