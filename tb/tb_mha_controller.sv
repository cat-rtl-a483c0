// tb_mha_controller: the MHA Controller at MS = 4, NBL = 4 (16-column tiles),
// P_ATB = 4, for L = 16, E = 64, 16 heads of dh = 4 and two batches, in both
// parallel modes. Linear blocks, attention blocks and Layernorm & Add are
// stubs with random run times. A scoreboard follows the data dependencies
// instead of a fixed job order:
//  - a head's attention starts only after the Q, K and V column tiles that
//    hold it are written, with the right Q/K/V/O slice addresses;
//  - Proj starts only after every head of the batch is done;
//  - Layernorm & Add starts only after every Proj tile is written, with the
//    batch's X as residual and Tmp as output;
//  - every Q, K, V and Proj tile and every head is done exactly once per batch.
// It also counts the mode's own mechanism: QKV and ATB running at once
// (pipelined mode) and four linear blocks on one GEMM (hybrid mode).
module tb_mha_controller;
  import cat_pkg::*;
  localparam int MS = 4, NBL = 4, P_ATB = 4, L = 16, E = 64, HEADS = 16, DH = 4, BATCH = 2;
  localparam int EV = E / MS, TILES = E / (NBL * MS);
  logic clk = 0, rst_n = 0, start = 0, busy;
  edpu_cfg_t cfg;
  logic lb_start [4], lb_busy [4], atb_start [P_ATB], atb_busy [P_ATB], ln_start, ln_busy;
  mm_job_t lb_job [4];
  atb_job_t atb_job [P_ATB];
  ln_job_t ln_job;
  int checks = 0, failures = 0;
  int n_overlap = 0, n_four = 0;
  always #5 clk = ~clk;

  mha_controller #(.MS(MS), .NBL(NBL), .P_ATB(P_ATB)) dut (.*);
  for (genvar i = 0; i < 4; i++) begin : g_lb
    unit_stub u (.clk, .rst_n, .start(lb_start[i]), .busy(lb_busy[i]));
  end
  for (genvar i = 0; i < P_ATB; i++) begin : g_atb
    unit_stub u (.clk, .rst_n, .start(atb_start[i]), .busy(atb_busy[i]));
  end
  unit_stub u_ln (.clk, .rst_n, .start(ln_start), .busy(ln_busy));

  initial begin repeat (100000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // scoreboard state of the current batch
  int batch;
  int tdone [4][TILES];      // 0 Q, 1 K, 2 V, 3 Proj: times a column tile was written
  int hdone [HEADS];
  mm_job_t  lbj [4];
  atb_job_t atj [P_ATB];
  logic lb_b_q [4], atb_b_q [P_ATB];

  function automatic int mat_of(logic [31:0] wbase);
    if (wbase == cfg.wq_base) return 0;
    if (wbase == cfg.wk_base) return 1;
    if (wbase == cfg.wv_base) return 2;
    if (wbase == cfg.wo_base) return 3;
    return -1;
  endfunction

  function automatic void fail(string msg);
    failures++;
    if (failures < 10) $display("%0t: %s", $time, msg);
  endfunction

  always @(posedge clk) if (rst_n) begin
    int nq, na;
    // completions
    for (int i = 0; i < 4; i++) begin
      if (lb_b_q[i] && !lb_busy[i]) begin
        automatic int m = mat_of(lbj[i].b.base);
        for (int t = lbj[i].n_first; t * NBL * MS < lbj[i].n; t += lbj[i].n_step) if (m >= 0) tdone[m][t]++;
      end
      lb_b_q[i] = lb_busy[i];
    end
    for (int i = 0; i < P_ATB; i++) begin
      if (atb_b_q[i] && !atb_busy[i]) hdone[atj[i].q.base - cfg.q_base]++;
      atb_b_q[i] = atb_busy[i];
    end
    // starts
    for (int i = 0; i < 4; i++) if (lb_start[i]) begin
      automatic int m = mat_of(lb_job[i].b.base);
      lbj[i] = lb_job[i];
      checks++;
      if (m < 0) fail("linear block job with unknown weights");
      else if (m < 3) begin
        if (lb_job[i].a.base != cfg.x_base + batch * L * EV) fail("QKV job reads the wrong X");
        if (lb_job[i].c.base != ((m == 0) ? cfg.q_base : (m == 1) ? cfg.k_base : cfg.v_base)) fail("QKV job writes the wrong matrix");
      end else begin
        checks++;
        for (int h = 0; h < HEADS; h++) if (hdone[h] != 1) begin fail($sformatf("Proj started before head %0d was done", h)); break; end
        if (lb_job[i].a.base != cfg.o_base || lb_job[i].c.base != cfg.p_base) fail("Proj job addresses");
      end
      if (lb_job[i].m != L || lb_job[i].k != E || lb_job[i].shift != cfg.qkv_shift) fail("linear job sizes");
    end
    for (int i = 0; i < P_ATB; i++) if (atb_start[i]) begin
      automatic int h = int'(atb_job[i].q.base - cfg.q_base);
      automatic int t = (h * DH) / (NBL * MS);
      atj[i] = atb_job[i];
      checks += 2;
      if (h < 0 || h >= HEADS) fail("attention job for a head that does not exist");
      else if (tdone[0][t] != 1 || tdone[1][t] != 1 || tdone[2][t] != 1)
        fail($sformatf("head %0d started before its Q/K/V tile %0d was written", h, t));
      if (atb_job[i].k.base != cfg.k_base + h || atb_job[i].v.base != cfg.v_base + h ||
          atb_job[i].o.base != cfg.o_base + h || atb_job[i].dh != DH || atb_job[i].l != L) fail("attention job slice");
    end
    if (ln_start) begin
      checks += 3;
      for (int m = 0; m < 4; m++) for (int t = 0; t < TILES; t++)
        if (tdone[m][t] != 1) fail($sformatf("matrix %0d tile %0d written %0d times before LN", m, t, tdone[m][t]));
      for (int h = 0; h < HEADS; h++) if (hdone[h] != 1) fail($sformatf("head %0d done %0d times", h, hdone[h]));
      if (ln_job.r.base != cfg.x_base + batch * L * EV || ln_job.y.base != cfg.tmp_base + batch * L * EV ||
          ln_job.a.base != cfg.p_base || ln_job.rows != L || ln_job.cols != E) fail("LN job addresses");
      foreach (tdone[m, t]) tdone[m][t] = 0;
      foreach (hdone[h]) hdone[h] = 0;
      batch++;
    end
    // mechanisms
    nq = 0; na = 0;
    for (int i = 0; i < 3; i++) nq += lb_busy[i] ? 1 : 0;
    for (int i = 0; i < P_ATB; i++) na += atb_busy[i] ? 1 : 0;
    if (nq > 0 && na > 0) n_overlap++;
    if (lb_busy[0] && lb_busy[1] && lb_busy[2] && lb_busy[3]) n_four++;
  end

  initial begin
    cfg = '0;
    cfg.x_base = 1000; cfg.wq_base = 2000; cfg.wk_base = 3000; cfg.wv_base = 4000; cfg.wo_base = 5000;
    cfg.q_base = 6000; cfg.k_base = 7000; cfg.v_base = 8000; cfg.o_base = 9000; cfg.p_base = 10000;
    cfg.tmp_base = 11000;
    cfg.l = L; cfg.e = E; cfg.heads = HEADS; cfg.dff = 4 * E; cfg.batch = BATCH;
    cfg.qkv_shift = 5; cfg.proj_shift = 5;
    for (int i = 0; i < 4; i++) lb_b_q[i] = 0;
    for (int i = 0; i < P_ATB; i++) atb_b_q[i] = 0;
    foreach (tdone[m, t]) tdone[m][t] = 0;
    foreach (hdone[h]) hdone[h] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int md = 0; md < 2; md++) begin
      int ov0, f0;
      batch = 0; ov0 = n_overlap; f0 = n_four;
      cfg.pm_mha = (md == 0) ? PM_PIPELINE : PM_HYBRID;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      while (busy) @(negedge clk);
      checks += 2;
      if (batch != BATCH) fail($sformatf("mode %0d closed %0d batches", md, batch));
      if (md == 0 && n_overlap == ov0) fail("pipelined mode never ran QKV and ATB at once");
      if (md == 1 && n_four == f0) fail("hybrid mode never ran four linear blocks at once");
      $display("mode %0d: qkv||atb cycles %0d, four-LB cycles %0d", md, n_overlap - ov0, n_four - f0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
