// tb_mnist1_workload: runs a network of the fully connected MNIST shape
// 784-1200-1200-10 on the accelerator at its default size. Trained weights
// are not available, so each sorted list gets a synthetic skewed profile
// |w_j| = m * (1 - j/n)^4 (about a fifth of the list is reached on average),
// every neuron has an excitatory list over 60 % and an inhibitory list over
// 40 % of the next layer, and the leading 20 % of every list is stored on
// chip (478 560 of the 2 392 800 target indices), the rest off chip.
// Input intensities are random, with 20 % of the pixels bright.
//
// Checks, over 8 timesteps:
//  * one index read per update, and the update count against the exact
//    expectation of the PWL termination point, summed over the lists of the
//    spikes that were actually propagated (computed by enumerating all 65536
//    random values for each list shape);
//  * the off-chip index reads against their exact expectation;
//  * memory accesses per spike and the off-chip share are printed next to the
//    deterministic count;
//  * spikes cross every layer and reach the output counters.
module tb_mnist1_workload;
  import psp_pkg::*;
  import psp_ref_pkg::*;

  localparam int L0 = 784, L1 = 1200, L2 = 1200, L3 = 10;
  localparam int B1 = L0, B2 = L0 + L1, B3 = L0 + L1 + L2, NT = B3 + L3;
  localparam int STEPS = 8;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  cfg_sel_e cfg_sel = CFG_PIXEL;
  logic [31:0] cfg_addr = 0;
  logic [CFG_W-1:0] cfg_wdata = 0;
  logic [15:0] n_in = L0;
  neuron_id_t out_base = B3, n_total = NT;
  potential_t v_th = 10000;
  logic [15:0] num_steps = STEPS;
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

  int checks = 0, failures = 0;

  psp_accelerator dut (.*);

  offchip_mem_model #(.LATENCY(20)) u_off (
    .clk(clk), .rst_n(rst_n), .we(1'b0), .waddr('0), .wdata('0),
    .req_valid(off_req_valid), .req_ready(off_req_ready), .req_addr(off_req_addr),
    .req_len(off_req_len), .rvalid(off_rvalid), .rdata(off_rdata));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // list shapes: index = 2*layer + polarity (layers 0..2 have outgoing lists)
  int       sh_len  [6];
  int       sh_onl  [6];
  int       sh_m    [6];
  pwl_seg_t sh_segs [6][NSEG];
  real      sh_et   [6];      // expected termpt
  real      sh_eoff [6];      // expected off-chip reads
  int prop_ids [$];
  always @(posedge clk) if (rst_n && dut.q_valid && dut.q_ready) prop_ids.push_back(int'(dut.q_id));

  function automatic int layer_of(input int id);
    if (id < B1) return 0;
    if (id < B2) return 1;
    if (id < B3) return 2;
    return 3;
  endfunction

  initial begin
    automatic int onc_ptr = 0, off_ptr = 0, cyc = 0;
    automatic int spans [3] = '{L1, L2, L3};
    automatic int bases [3] = '{B1, B2, B3};
    automatic int me [3] = '{400, 400, 3000};
    automatic int mi [3] = '{300, 300, 1500};
    desc_t d;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    // list shapes and their exact expectations
    for (int s = 0; s < 6; s++) begin
      automatic int lay = s / 2, p = s % 2;
      int w [];
      sh_len[s] = p ? spans[lay] - (spans[lay] * 3) / 5 : (spans[lay] * 3) / 5;
      sh_onl[s] = sh_len[s] / 5;
      sh_m[s]   = p ? mi[lay] : me[lay];
      w = new[sh_len[s]];
      for (int j = 0; j < sh_len[s]; j++) begin
        real x;
        x = 1.0 - real'(j) / real'(sh_len[s]);
        w[j] = int'(real'(sh_m[s]) * x * x * x * x) + 1;
      end
      w[0] = sh_m[s];
      pwl_fit(w, sh_len[s], sh_segs[s]);
      sh_et[s] = 0; sh_eoff[s] = 0;
      for (int rn = 0; rn < 65536; rn++) begin
        longint t;
        t = pwl_ref(scaled_r(rn, sh_m[s]), sh_len[s], sh_segs[s]);
        sh_et[s] += real'(t);
        if (t > sh_onl[s]) sh_eoff[s] += real'(t - sh_onl[s]);
      end
      sh_et[s] /= 65536.0; sh_eoff[s] /= 65536.0;
      $display("list shape %0d: n %0d, on chip %0d, E[termpt] %0.1f, E[off-chip] %0.1f", s, sh_len[s], sh_onl[s], sh_et[s], sh_eoff[s]);
    end
    // pixels
    for (int i = 0; i < L0; i++) begin
      cfg_we = 1; cfg_sel = CFG_PIXEL; cfg_addr = 32'(i);
      cfg_wdata = CFG_W'(($urandom_range(0, 4) == 0) ? $urandom_range(160, 255) : $urandom_range(0, 8));
      @(negedge clk);
    end
    // descriptors, segments, indices
    for (int id = 0; id < NT; id++) begin
      automatic int lay = layer_of(id);
      for (int p = 0; p < 2; p++) begin
        automatic int pr = 2 * id + p, s = 2 * lay + p;
        if (lay == 3) begin
          d = '0;
          cfg_we = 1; cfg_sel = CFG_DESC; cfg_addr = 32'(pr); cfg_wdata = CFG_W'(d);
          @(negedge clk);
          continue;
        end
        d.n_max = pos_t'(sh_len[s]);
        d.w_hat = p ? weight_t'(-sh_m[s]) : weight_t'(sh_m[s]);
        d.onc_len = pos_t'(sh_onl[s]);
        d.onc_base = addr_t'(onc_ptr);
        d.off_base = addr_t'(off_ptr);
        cfg_we = 1; cfg_sel = CFG_DESC; cfg_addr = 32'(pr); cfg_wdata = CFG_W'(d);
        @(negedge clk);
        for (int k = 0; k < NSEG; k++) begin
          cfg_sel = CFG_PWL; cfg_addr = 32'(8 * pr + k); cfg_wdata = CFG_W'(sh_segs[s][k]);
          @(negedge clk);
        end
        for (int j = 0; j < sh_len[s]; j++) begin
          // target permutation over the next layer: excitatory positions
          // 0..n_exc-1, inhibitory positions n_exc..span-1
          automatic int q = p ? j + sh_len[2 * lay] : j;
          automatic int t = bases[lay] + ((lay == 2 ? 3 : 7) * q + 13 * id) % spans[lay];
          if (j < sh_onl[s]) begin
            cfg_sel = CFG_ONC; cfg_addr = 32'(onc_ptr); cfg_wdata = CFG_W'(t);
            onc_ptr++;
            @(negedge clk);
          end else begin
            u_off.mem[addr_t'(off_ptr)] = neuron_id_t'(t);
            off_ptr++;
          end
        end
        cfg_we = 0;
      end
    end
    cfg_we = 0;
    $display("loaded: %0d indices on chip, %0d off chip", onc_ptr, off_ptr);
    check(onc_ptr <= 524288, "on-chip share fits the default on-chip index memory");
    check(onc_ptr + off_ptr == L0 * L1 + L1 * L2 + L2 * L3, "all synapses stored");
    // run
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) begin @(negedge clk); cyc++; end
    begin
      real e_upd, e_off, det, maps, reads;
      int  per_layer [4];
      int  outs;
      e_upd = 0; e_off = 0; det = 0;
      per_layer = '{0, 0, 0, 0};
      foreach (prop_ids[k]) begin
        automatic int lay = layer_of(prop_ids[k]);
        per_layer[lay]++;
        if (lay < 3) for (int p = 0; p < 2; p++) begin
          e_upd += sh_et[2 * lay + p];
          e_off += sh_eoff[2 * lay + p];
          det   += real'(sh_len[2 * lay + p]);
        end
      end
      reads = real'(st_onc_reads + st_off_reads);
      maps  = reads / real'(prop_ids.size());
      outs  = 0;
      for (int o = 0; o < L3; o++) begin cnt_rd_addr = 8'(o); #1; outs += int'(cnt_rd_data); end
      $display("run: %0d cycles for %0d timesteps; spikes propagated per layer %0d/%0d/%0d, output spikes %0d",
               cyc, STEPS, per_layer[0], per_layer[1], per_layer[2], outs);
      $display("updates %0d (expected %0.0f); index reads per spike %0.1f, deterministic %0.1f, ratio %0.3f; off-chip share of deterministic %0.3f (expected %0.3f)",
               st_updates, e_upd, maps, det / real'(prop_ids.size()), reads / det, real'(st_off_reads) / det, e_off / det);
      check(step_count == 16'(STEPS), "timestep count");
      check(reads == real'(st_updates), "one index read per update");
      check(real'(st_updates) > 0.97 * e_upd && real'(st_updates) < 1.03 * e_upd, "updates match the PWL expectation");
      check(real'(st_off_reads) > 0.95 * e_off && real'(st_off_reads) < 1.05 * e_off, "off-chip reads match their expectation");
      check(reads / det < 0.3, "memory accesses per spike well below the deterministic count");
      check(per_layer[0] > 0 && per_layer[1] > 0 && per_layer[2] > 0 && outs > 0, "activity reaches every layer and the outputs");
      check(st_early > 0 && st_off_bursts > 0 && st_contention > 0, "early termination, off-chip bursts, queue contention occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
