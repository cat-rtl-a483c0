// tb_mm_prg: one PRG with a 2 x 2 x 2 kernel group at MS = 4 (8 x 8 output
// tiles, k steps of 8) against three DRAM models with random back-pressure.
// Runs C = requant(A * B) for a 12 x 16 x 20 GEMM (partial tiles at both the M
// and the N edge), then only the odd column tiles (n_first 1, n_step 2, the
// rest must stay untouched), then a GELU job. Checks every output byte and the
// compute time: MS*MS cycles per PU iteration.
module tb_mm_prg;
  import cat_pkg::*;
  import cat_ref_pkg::*;
  localparam int MS = 4, MB = 2, KB = 2, NB = 2, VW = MS * 8;
  localparam int M = 12, K = 16, N = 20;
  logic clk = 0, rst_n = 0, start = 0, busy, pu_active;
  mm_job_t job;
  logic a_req_valid, a_req_ready, a_rsp_valid, b_req_valid, b_req_ready, b_rsp_valid;
  logic c_req_valid, c_req_ready, c_rsp_valid;
  logic [31:0] a_req_addr, b_req_addr, c_req_addr;
  logic [15:0] a_req_row, a_req_cvec, b_req_row, b_req_cvec;
  logic [VW-1:0] a_rsp_data, b_rsp_data, c_req_data, c_rsp_data;
  int checks = 0, failures = 0, act_cycles = 0;
  mat_t a, b;
  always #5 clk = ~clk;
  always @(posedge clk) if (pu_active) act_cycles++;

  mm_prg #(.MS(MS), .MB(MB), .KB(KB), .NB(NB)) dut (.*);
  dram_model #(.VW(VW), .DEPTH(256), .LAT(3), .STALL_PCT(20)) u_a (
    .clk, .rst_n, .req_valid(a_req_valid), .req_we(1'b0), .req_addr(a_req_addr), .req_wdata('0),
    .req_ready(a_req_ready), .rsp_valid(a_rsp_valid), .rsp_data(a_rsp_data));
  dram_model #(.VW(VW), .DEPTH(256), .LAT(5), .STALL_PCT(20)) u_b (
    .clk, .rst_n, .req_valid(b_req_valid), .req_we(1'b0), .req_addr(b_req_addr), .req_wdata('0),
    .req_ready(b_req_ready), .rsp_valid(b_rsp_valid), .rsp_data(b_rsp_data));
  dram_model #(.VW(VW), .DEPTH(256), .LAT(2), .STALL_PCT(20)) u_c (
    .clk, .rst_n, .req_valid(c_req_valid), .req_we(1'b1), .req_addr(c_req_addr), .req_wdata(c_req_data),
    .req_ready(c_req_ready), .rsp_valid(c_rsp_valid), .rsp_data(c_rsp_data));

  initial begin repeat (100000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic run(input int nf, input int ns, input post_op_e post, input int sh);
    mat_t c;
    int tiles_m, tiles_n, iters, got, exp_v;
    for (int i = 0; i < 256; i++) u_c.mem[i] = {VW{1'b1}} ^ VW'(i);   // sentinel
    job = '0;
    job.a = '{base: 32'd10, ld: 16'(K / MS)};
    job.b = '{base: 32'd20, ld: 16'(N / MS)};
    job.c = '{base: 32'd30, ld: 16'(N / MS)};
    job.m = 16'(M); job.k = 16'(K); job.n = 16'(N);
    job.n_first = 8'(nf); job.n_step = 8'(ns); job.shift = 5'(sh); job.post = post;
    act_cycles = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    c = matmul(a, b, M, K, N, sh);
    if (post == POST_GELU) foreach (c[i]) c[i] = gelu(c[i]);
    tiles_m = (M + MB*MS - 1) / (MB*MS);
    tiles_n = 0;
    for (int t = nf; t * NB * MS < N; t += ns) tiles_n++;
    iters = tiles_m * tiles_n * (K / (KB*MS));
    checks++;
    if (act_cycles != iters * MS * MS) begin
      failures++; $display("PU active %0d cycles, expected %0d", act_cycles, iters * MS * MS);
    end
    for (int r = 0; r < M; r++) for (int col = 0; col < N; col++) begin
      int t = col / (NB*MS);
      bit done = (t >= nf) && ((t - nf) % ns == 0);
      logic [VW-1:0] w = u_c.mem[30 + r * (N/MS) + col / MS];
      got = int'(signed'(w[(col % MS)*8 +: 8]));
      checks++;
      if (done) begin
        exp_v = c[r*N + col];
        if (got != exp_v) begin failures++; if (failures < 6) $display("C[%0d][%0d] = %0d, expected %0d", r, col, got, exp_v); end
      end else if (w != ({VW{1'b1}} ^ VW'(30 + r * (N/MS) + col / MS))) begin
        failures++; if (failures < 6) $display("C[%0d][%0d] written but not in n_first/n_step", r, col);
      end
    end
  endtask

  initial begin
    a = new[M*K]; b = new[K*N];
    foreach (a[i]) a[i] = int'($urandom_range(255)) - 128;
    foreach (b[i]) b[i] = int'($urandom_range(31)) - 16;
    for (int i = 0; i < 256; i++) begin u_a.mem[i] = '0; u_b.mem[i] = '0; end
    for (int r = 0; r < M; r++) for (int col = 0; col < K; col++) u_a.mem[10 + r*(K/MS) + col/MS][(col%MS)*8 +: 8] = 8'(a[r*K + col]);
    for (int r = 0; r < K; r++) for (int col = 0; col < N; col++) u_b.mem[20 + r*(N/MS) + col/MS][(col%MS)*8 +: 8] = 8'(b[r*N + col]);
    repeat (3) @(negedge clk); rst_n = 1;
    run(0, 1, POST_NONE, 7);
    run(1, 2, POST_NONE, 6);
    run(0, 1, POST_GELU, 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
