// tb_ffn_controller: the FFN Controller at MS = 4 (16-column tiles of the
// Large PU) for L = 16, E = 32, Dff = 64 and three batches, in both parallel
// modes, with stub units of random run time. A scoreboard checks the data
// dependencies of every job:
//  - FFN1 of batch b reads Tmp_b, applies GELU and writes H buffer b mod 2,
//    and only once FFN2 of batch b-2 (the last reader of that buffer) is done;
//  - FFN2 of batch b starts only after all H tiles of batch b are written,
//    and only once Layernorm & Add of batch b-1 (the last reader of F) is done;
//  - Layernorm & Add of batch b starts only after all F tiles of batch b are
//    written, with Tmp_b as residual and Res_b as output;
//  - every tile is written exactly once per batch.
// It counts FFN1 and FFN2 running at once (pipelined mode) and four linear
// blocks on one GEMM (hybrid mode) and fails if the mode's one is never seen.
module tb_ffn_controller;
  import cat_pkg::*;
  localparam int MS = 4, L = 16, E = 32, DFF = 64, BATCH = 3, TW = 4 * MS;
  localparam int EV = E / MS, FV = DFF / MS, HT = DFF / TW, FT = E / TW;
  logic clk = 0, rst_n = 0, start = 0, busy;
  edpu_cfg_t cfg;
  logic lb_start [4], lb_busy [4], ln_start, ln_busy;
  mm_job_t lb_job [4];
  ln_job_t ln_job;
  int checks = 0, failures = 0, n_overlap = 0, n_four = 0;
  always #5 clk = ~clk;

  ffn_controller #(.MS(MS)) dut (.*);
  for (genvar i = 0; i < 4; i++) begin : g_lb
    unit_stub u (.clk, .rst_n, .start(lb_start[i]), .busy(lb_busy[i]));
  end
  unit_stub u_ln (.clk, .rst_n, .start(ln_start), .busy(ln_busy));

  initial begin repeat (100000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  int hdone [BATCH][HT], fdone [BATCH][FT];
  int f2_end [BATCH], ln_end [BATCH], ln_cnt;
  int jb [4];          // batch of each LB's running job
  bit j1 [4];          // running job is FFN1
  mm_job_t lbj [4];
  logic lb_b_q [4], ln_b_q;
  int ln_b;

  function automatic void fail(string msg);
    failures++;
    if (failures < 10) $display("%0t: %s", $time, msg);
  endfunction

  function automatic bit all_h(int b);
    for (int t = 0; t < HT; t++) if (hdone[b][t] != 1) return 0;
    return 1;
  endfunction
  function automatic bit all_f(int b);
    for (int t = 0; t < FT; t++) if (fdone[b][t] != 1) return 0;
    return 1;
  endfunction

  always @(posedge clk) if (rst_n) begin
    int n1, n2;
    for (int i = 0; i < 4; i++) begin
      if (lb_b_q[i] && !lb_busy[i]) begin
        for (int t = lbj[i].n_first; t * TW < lbj[i].n; t += lbj[i].n_step)
          if (j1[i]) hdone[jb[i]][t]++; else fdone[jb[i]][t]++;
        if (!j1[i] && all_f(jb[i])) f2_end[jb[i]] = 1;
      end
      lb_b_q[i] = lb_busy[i];
    end
    if (ln_b_q && !ln_busy) ln_end[ln_b] = 1;
    ln_b_q = ln_busy;
    for (int i = 0; i < 4; i++) if (lb_start[i]) begin
      automatic int b = int'(lb_job[i].post == POST_GELU ? (lb_job[i].a.base - cfg.tmp_base) / (L * EV)
                                                         : (lb_job[i].a.base - cfg.h_base) / (L * FV));
      lbj[i] = lb_job[i]; jb[i] = b; j1[i] = (lb_job[i].post == POST_GELU);
      checks += 2;
      if (j1[i]) begin
        if (lb_job[i].a.base != cfg.tmp_base + b * L * EV || lb_job[i].b.base != cfg.w1_base ||
            lb_job[i].c.base != cfg.h_base + (b % 2) * L * FV || lb_job[i].k != E || lb_job[i].n != DFF ||
            lb_job[i].shift != cfg.ffn1_shift) fail("FFN1 job fields");
        if (b >= 2 && !f2_end[b - 2]) fail($sformatf("FFN1 of batch %0d overwrites H before FFN2 of batch %0d ended", b, b - 2));
      end else begin
        b = b % 2;
        // the buffer holds the oldest batch not yet through FFN2
        for (int bb = 0; bb < BATCH; bb++) if (bb % 2 == b && !f2_end[bb]) begin b = bb; break; end
        jb[i] = b;
        if (lb_job[i].b.base != cfg.w2_base || lb_job[i].c.base != cfg.f_base || lb_job[i].k != DFF ||
            lb_job[i].n != E || lb_job[i].post != POST_NONE || lb_job[i].shift != cfg.ffn2_shift) fail("FFN2 job fields");
        if (!all_h(b)) fail($sformatf("FFN2 of batch %0d started before H was complete", b));
        if (b >= 1 && !ln_end[b - 1]) fail($sformatf("FFN2 of batch %0d overwrites F before LN of batch %0d ended", b, b - 1));
      end
    end
    if (ln_start) begin
      ln_b = ln_cnt; ln_cnt++;
      checks += 2;
      if (!all_f(ln_b)) fail($sformatf("LN of batch %0d before F was complete", ln_b));
      if (ln_job.a.base != cfg.f_base || ln_job.r.base != cfg.tmp_base + ln_b * L * EV ||
          ln_job.y.base != cfg.res_base + ln_b * L * EV || ln_job.cols != E || ln_job.rows != L) fail("LN job fields");
    end
    n1 = 0; n2 = 0;
    for (int i = 0; i < 4; i++) if (lb_busy[i]) begin if (j1[i]) n1++; else n2++; end
    if (n1 > 0 && n2 > 0) n_overlap++;
    if (n1 + n2 == 4) n_four++;
  end

  initial begin
    cfg = '0;
    cfg.w1_base = 1000; cfg.w2_base = 2000; cfg.h_base = 3000; cfg.f_base = 4000;
    cfg.tmp_base = 5000; cfg.res_base = 6000;
    cfg.l = L; cfg.e = E; cfg.heads = 8; cfg.dff = DFF; cfg.batch = BATCH;
    cfg.ffn1_shift = 6; cfg.ffn2_shift = 7;
    for (int i = 0; i < 4; i++) begin lb_b_q[i] = 0; j1[i] = 0; jb[i] = 0; end
    ln_b_q = 0; ln_b = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int md = 0; md < 2; md++) begin
      int ov0, f0;
      foreach (hdone[b, t]) hdone[b][t] = 0;
      foreach (fdone[b, t]) fdone[b][t] = 0;
      foreach (f2_end[b]) begin f2_end[b] = 0; ln_end[b] = 0; end
      ln_cnt = 0; ov0 = n_overlap; f0 = n_four;
      cfg.pm_ffn = (md == 0) ? PM_PIPELINE : PM_HYBRID;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      while (busy) @(negedge clk);
      checks += 3;
      if (ln_cnt != BATCH) fail($sformatf("mode %0d closed %0d batches", md, ln_cnt));
      for (int b = 0; b < BATCH; b++) if (!all_h(b) || !all_f(b)) fail($sformatf("batch %0d tiles incomplete", b));
      if (md == 0 && n_overlap == ov0) fail("pipelined mode never ran FFN1 and FFN2 at once");
      if (md == 1 && n_four == f0) fail("hybrid mode never ran four linear blocks at once");
      $display("mode %0d: ffn1||ffn2 cycles %0d, four-LB cycles %0d", md, n_overlap - ov0, n_four - f0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
