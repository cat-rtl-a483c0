// tb_mm_sender: the Sender at MS = 4 with a 2 x 2 x 2 kernel group, reading
// A and B from two DRAM models with random back-pressure and different
// latencies. For several (mt, nt, kt, mb_valid, nb_valid) it rebuilds the PU
// windows from the write strobes and checks every row of every valid block,
// that each row is written exactly once, and that no write goes to an
// invalid block.
module tb_mm_sender;
  import cat_pkg::*;
  localparam int MS = 4, MB = 2, KB = 2, NB = 2, VW = MS * 8, RW = 2;
  localparam int M = 16, K = 16, N = 16;
  logic clk = 0, rst_n = 0, start = 0, busy;
  mat_desc_t a_desc, b_desc;
  logic [15:0] mt, nt, kt;
  logic [7:0] mb_valid, nb_valid;
  logic a_req_valid, a_req_ready, a_rsp_valid, b_req_valid, b_req_ready, b_rsp_valid;
  logic [31:0] a_req_addr, b_req_addr;
  logic [15:0] a_req_row, a_req_cvec, b_req_row, b_req_cvec;
  logic [VW-1:0] a_rsp_data, b_rsp_data, pu_a_data, pu_b_data;
  logic pu_a_we, pu_b_we;
  logic [7:0] pu_a_blk, pu_b_blk;
  logic [RW-1:0] pu_a_row, pu_b_row;
  int checks = 0, failures = 0;
  int a [M][K], b [K][N];
  int na [MB*KB][MS], nb [KB*NB][MS];
  logic [VW-1:0] wa [MB*KB][MS], wb [KB*NB][MS];
  always #5 clk = ~clk;

  mm_sender #(.MS(MS), .MB(MB), .KB(KB), .NB(NB)) dut (.*);
  dram_model #(.VW(VW), .DEPTH(128), .LAT(3), .STALL_PCT(25)) u_a (
    .clk, .rst_n, .req_valid(a_req_valid), .req_we(1'b0), .req_addr(a_req_addr), .req_wdata('0),
    .req_ready(a_req_ready), .rsp_valid(a_rsp_valid), .rsp_data(a_rsp_data));
  dram_model #(.VW(VW), .DEPTH(128), .LAT(6), .STALL_PCT(25)) u_b (
    .clk, .rst_n, .req_valid(b_req_valid), .req_we(1'b0), .req_addr(b_req_addr), .req_wdata('0),
    .req_ready(b_req_ready), .rsp_valid(b_rsp_valid), .rsp_data(b_rsp_data));

  always @(negedge clk) begin
    if (pu_a_we) begin na[pu_a_blk][pu_a_row]++; wa[pu_a_blk][pu_a_row] = pu_a_data; end
    if (pu_b_we) begin nb[pu_b_blk][pu_b_row]++; wb[pu_b_blk][pu_b_row] = pu_b_data; end
  end

  initial begin repeat (50000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic run(input int m_t, input int n_t, input int k_t, input int mbv, input int nbv);
    foreach (na[i, j]) na[i][j] = 0;
    foreach (nb[i, j]) nb[i][j] = 0;
    mt = 16'(m_t); nt = 16'(n_t); kt = 16'(k_t); mb_valid = 8'(mbv); nb_valid = 8'(nbv);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    @(negedge clk);
    for (int mb = 0; mb < MB; mb++) for (int kb = 0; kb < KB; kb++) for (int r = 0; r < MS; r++) begin
      int blk = mb*KB + kb;
      checks++;
      if (na[blk][r] != ((mb < mbv) ? 1 : 0)) begin failures++; $display("A block %0d row %0d written %0d times", blk, r, na[blk][r]); end
      if (mb < mbv) for (int j = 0; j < MS; j++) begin
        checks++;
        if (int'(signed'(wa[blk][r][j*8 +: 8])) != a[(m_t*MB + mb)*MS + r][(k_t*KB + kb)*MS + j]) failures++;
      end
    end
    for (int kb = 0; kb < KB; kb++) for (int n_b = 0; n_b < NB; n_b++) for (int r = 0; r < MS; r++) begin
      int blk = kb*NB + n_b;
      checks++;
      if (nb[blk][r] != ((n_b < nbv) ? 1 : 0)) begin failures++; $display("B block %0d row %0d written %0d times", blk, r, nb[blk][r]); end
      if (n_b < nbv) for (int j = 0; j < MS; j++) begin
        checks++;
        if (int'(signed'(wb[blk][r][j*8 +: 8])) != b[(k_t*KB + kb)*MS + r][(n_t*NB + n_b)*MS + j]) failures++;
      end
    end
  endtask

  initial begin
    for (int i = 0; i < 128; i++) begin u_a.mem[i] = '0; u_b.mem[i] = '0; end
    foreach (a[i, j]) begin a[i][j] = int'($urandom_range(255)) - 128; u_a.mem[8 + i*(K/MS) + j/MS][(j%MS)*8 +: 8] = 8'(a[i][j]); end
    foreach (b[i, j]) begin b[i][j] = int'($urandom_range(255)) - 128; u_b.mem[40 + i*(N/MS) + j/MS][(j%MS)*8 +: 8] = 8'(b[i][j]); end
    a_desc = '{base: 32'd8, ld: 16'(K/MS)};
    b_desc = '{base: 32'd40, ld: 16'(N/MS)};
    repeat (3) @(negedge clk); rst_n = 1;
    run(0, 0, 0, 2, 2);
    run(1, 1, 1, 2, 2);
    run(1, 0, 1, 1, 2);
    run(0, 1, 0, 2, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
