// edpu_env: test environment for cat_edpu, shared by the reduced-size and the
// full-size end-to-end testbenches. It makes the clock and reset, holds the
// DRAM model, loads a random encoder layer (inputs and weights), runs the EDPU
// once per requested parallel-mode pair, compares every output byte with
// cat_ref_pkg::layer and counts how often each mechanism of the design was
// seen (pipelined QKV/ATB overlap, FFN1/FFN2 overlap, four linear blocks
// sharing one GEMM, DRAM back-pressure, several units on the DRAM port at
// once). It prints the TB_RESULT line and ends the simulation.
module edpu_env
  import cat_pkg::*;
  import cat_ref_pkg::*;
#(
  parameter int MS     = 4,
  parameter int P_ATB  = 4,
  parameter int L      = 16,
  parameter int E      = 32,
  parameter int HEADS  = 8,
  parameter int DFF    = 64,
  parameter int BATCH  = 2,
  parameter int MODES  = 2,        // 1: pipeline only, 2: pipeline then hybrid
  parameter int MAXCYC = 2000000,
  parameter int DEPTH  = 4096,
  parameter int WMAG   = 8         // weights in [-WMAG, WMAG-1]
) (
  output logic            clk,
  output logic            rst_n,
  output logic            start,
  output edpu_cfg_t       cfg,
  input  logic            busy,
  input  logic            dram_valid,
  input  logic            dram_we,
  input  logic [31:0]     dram_addr,
  input  logic [MS*8-1:0] dram_wdata,
  output logic            dram_ready,
  output logic            dram_rvalid,
  output logic [MS*8-1:0] dram_rdata,
  input  logic [31:0]     mha_cycles,
  input  logic [31:0]     ffn_cycles,
  input  logic [47:0]     kernel_cycles,
  input  logic [3:0]      lb_active,
  input  logic [P_ATB-1:0] atb_active,
  input  logic            ln_active,
  input  logic            ffn_stage
);
  localparam int EV = E / MS, FV = DFF / MS;
  // DRAM map, in vecs
  localparam int A_X   = 0;
  localparam int A_WQ  = A_X + BATCH * L * EV;
  localparam int A_WK  = A_WQ + E * EV;
  localparam int A_WV  = A_WK + E * EV;
  localparam int A_WO  = A_WV + E * EV;
  localparam int A_W1  = A_WO + E * EV;
  localparam int A_W2  = A_W1 + E * FV;
  localparam int A_Q   = A_W2 + DFF * EV;
  localparam int A_K   = A_Q + L * EV;
  localparam int A_V   = A_K + L * EV;
  localparam int A_O   = A_V + L * EV;
  localparam int A_P   = A_O + L * EV;
  localparam int A_H   = A_P + L * EV;
  localparam int A_F   = A_H + 2 * L * FV;
  localparam int A_TMP = A_F + L * EV;
  localparam int A_RES = A_TMP + BATCH * L * EV;
  localparam int A_END = A_RES + BATCH * L * EV;

  int checks = 0, failures = 0;
  int n_qkv_atb = 0, n_ffn_overlap = 0, n_four_lb = 0, n_stall = 0, n_multi = 0, n_gelu = 0;
  int n_ln = 0;

  dram_model #(.VW(MS*8), .DEPTH(DEPTH), .LAT(4), .STALL_PCT(10)) u_dram (
    .clk, .rst_n, .req_valid(dram_valid), .req_we(dram_we), .req_addr(dram_addr),
    .req_wdata(dram_wdata), .req_ready(dram_ready), .rsp_valid(dram_rvalid), .rsp_data(dram_rdata)
  );

  initial clk = 1'b0;
  always #5 clk = ~clk;

  // mechanism monitors
  always @(posedge clk) if (rst_n && busy) begin
    if (!ffn_stage && (|lb_active[2:0]) && (|atb_active)) n_qkv_atb++;
    if (ffn_stage && lb_active[0] && lb_active[2]) n_ffn_overlap++;
    if (!ffn_stage && (&lb_active) && !(|atb_active)) n_four_lb++;
    if (dram_valid && !dram_ready) n_stall++;
    if ((int'($countones(lb_active)) + int'($countones(atb_active)) + int'(ln_active)) > 1 && dram_valid) n_multi++;
    if (ffn_stage && (|lb_active[1:0])) n_gelu++;
    if (ln_active) n_ln++;
  end

  // watchdog
  initial begin
    repeat (MAXCYC) @(posedge clk);
    failures++;
    $display("watchdog: no end after %0d cycles", MAXCYC);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void put(int base, int ld, mat_t m, int rows, int cols);
    for (int r = 0; r < rows; r++)
      for (int c = 0; c < cols; c++)
        u_dram.mem[base + r * ld + c / MS][(c % MS) * 8 +: 8] = 8'(m[r * cols + c]);
  endfunction

  function automatic int get(int base, int ld, int r, int c);
    return int'(signed'(u_dram.mem[base + r * ld + c / MS][(c % MS) * 8 +: 8]));
  endfunction

  function automatic mat_t rnd(int n, int mag);
    mat_t m = new[n];
    foreach (m[i]) m[i] = int'($urandom_range(2 * mag - 1)) - mag;
    return m;
  endfunction

  mat_t x [BATCH];
  mat_t ref_res [BATCH];
  mat_t wq, wk, wv, wo, w1, w2;

  initial begin
    int sh_qkv, sh_s, sh_o, sh_p, sh_1, sh_2;
    if (A_END > DEPTH) $fatal(1, "DRAM model too small: %0d > %0d", A_END, DEPTH);
    sh_qkv = 4 + $clog2(E) / 2 - 2;
    sh_s = 6; sh_o = 7; sh_p = sh_qkv; sh_1 = sh_qkv; sh_2 = 4 + $clog2(DFF) / 2 - 2;
    rst_n = 1'b0; start = 1'b0; cfg = '0;
    for (int i = 0; i < DEPTH; i++) u_dram.mem[i] = '0;
    wq = rnd(E * E, WMAG); wk = rnd(E * E, WMAG); wv = rnd(E * E, WMAG); wo = rnd(E * E, WMAG);
    w1 = rnd(E * DFF, WMAG); w2 = rnd(DFF * E, WMAG);
    put(A_WQ, EV, wq, E, E); put(A_WK, EV, wk, E, E); put(A_WV, EV, wv, E, E);
    put(A_WO, EV, wo, E, E); put(A_W1, FV, w1, E, DFF); put(A_W2, EV, w2, DFF, E);
    for (int b = 0; b < BATCH; b++) begin
      x[b] = rnd(L * E, 32);
      put(A_X + b * L * EV, EV, x[b], L, E);
      ref_res[b] = layer(x[b], wq, wk, wv, wo, w1, w2, L, E, HEADS, DFF,
                         sh_qkv, sh_s, sh_o, sh_p, sh_1, sh_2);
    end
    cfg.x_base = A_X; cfg.wq_base = A_WQ; cfg.wk_base = A_WK; cfg.wv_base = A_WV;
    cfg.wo_base = A_WO; cfg.w1_base = A_W1; cfg.w2_base = A_W2;
    cfg.q_base = A_Q; cfg.k_base = A_K; cfg.v_base = A_V; cfg.o_base = A_O; cfg.p_base = A_P;
    cfg.h_base = A_H; cfg.f_base = A_F; cfg.tmp_base = A_TMP; cfg.res_base = A_RES;
    cfg.l = 16'(L); cfg.e = 16'(E); cfg.heads = 16'(HEADS); cfg.dff = 16'(DFF); cfg.batch = 8'(BATCH);
    cfg.qkv_shift = 5'(sh_qkv); cfg.s_shift = 5'(sh_s); cfg.o_shift = 5'(sh_o);
    cfg.proj_shift = 5'(sh_p); cfg.ffn1_shift = 5'(sh_1); cfg.ffn2_shift = 5'(sh_2);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int md = 0; md < MODES; md++) begin
      int errs, t0;
      cfg.pm_mha = (md == 0) ? PM_PIPELINE : PM_HYBRID;
      cfg.pm_ffn = (md == 0) ? PM_PIPELINE : PM_HYBRID;
      for (int i = A_TMP; i < A_END; i++) u_dram.mem[i] = '0;
      @(posedge clk); start <= 1'b1;
      @(posedge clk); start <= 1'b0;
      t0 = 0;
      @(posedge clk);
      while (busy) begin @(posedge clk); t0++; end
      errs = 0;
      for (int b = 0; b < BATCH; b++)
        for (int r = 0; r < L; r++)
          for (int c = 0; c < E; c++) begin
            int got;
            got = get(A_RES + b * L * EV, EV, r, c);
            checks++;
            if (got != ref_res[b][r * E + c]) begin
              errs++;
              if (errs <= 5)
                $display("mode %0d batch %0d res[%0d][%0d] = %0d, expected %0d", md, b, r, c, got,
                         ref_res[b][r * E + c]);
            end
          end
      failures += errs;
      $display("mode %0s: %0d cycles (MHA %0d, FFN %0d), kernel-cycles %0d, avg busy kernels %0.1f, %0d mismatches",
               md == 0 ? "pipeline" : "hybrid", t0, mha_cycles, ffn_cycles, kernel_cycles,
               real'(kernel_cycles) / real'(t0), errs);
      checks++;
      if (u_dram.out_of_range != 0) begin
        failures++;
        $display("access outside the DRAM model");
      end
    end
    $display("mechanisms: qkv||atb %0d, ffn1||ffn2 %0d, four-LB gemm %0d, dram stall %0d, shared port %0d, gelu %0d, ln %0d",
             n_qkv_atb, n_ffn_overlap, n_four_lb, n_stall, n_multi, n_gelu, n_ln);
    checks += 6;
    if (n_qkv_atb == 0) begin failures++; $display("never saw QKV and ATB in parallel"); end
    if (n_ffn_overlap == 0 && BATCH > 1) begin failures++; $display("never saw FFN1 and FFN2 in parallel"); end
    if (n_four_lb == 0 && MODES > 1) begin failures++; $display("never saw four LBs on one GEMM"); end
    if (n_stall == 0) begin failures++; $display("never saw a DRAM stall"); end
    if (n_multi == 0) begin failures++; $display("never saw shared DRAM port"); end
    if (n_ln == 0) begin failures++; $display("never saw Layernorm & Add"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
