// tb_aie_mm_pu: a 2 x 3 x 2 kernel group at MS = 4 (a 8 x 12 x 8 block
// product). Checks the cascade sum over the KB kernels of every output block,
// the broadcast of A and B rows, the MS*MS-cycle iteration time, and
// accumulation across two iterations.
module tb_aie_mm_pu;
  localparam int MS = 4, MB = 2, KB = 3, NB = 2, RW = $clog2(MS);
  localparam int M = MB*MS, K = KB*MS, N = NB*MS;
  logic clk = 0, rst_n = 0, a_we = 0, b_we = 0, start = 0, acc_clear = 0, busy;
  logic [7:0] a_blk = 0, b_blk = 0, c_blk = 0;
  logic [RW-1:0] a_row = '0, b_row = '0, c_row = '0;
  logic [MS*8-1:0] a_data = '0, b_data = '0;
  logic [MS*32-1:0] c_data;
  int checks = 0, failures = 0;
  int a [M][K], b [K][N], acc [M][N];
  always #5 clk = ~clk;
  aie_mm_pu #(.MS(MS), .MB(MB), .KB(KB), .NB(NB)) dut (.*);
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic run(input bit clr);
    int cyc;
    foreach (a[i, j]) a[i][j] = int'($urandom_range(255)) - 128;
    foreach (b[i, j]) b[i][j] = int'($urandom_range(255)) - 128;
    for (int mb = 0; mb < MB; mb++) for (int kb = 0; kb < KB; kb++) for (int r = 0; r < MS; r++) begin
      @(negedge clk); a_we = 1; a_blk = 8'(mb*KB + kb); a_row = RW'(r);
      for (int j = 0; j < MS; j++) a_data[j*8 +: 8] = 8'(a[mb*MS + r][kb*MS + j]);
    end
    @(negedge clk); a_we = 0;
    for (int kb = 0; kb < KB; kb++) for (int nb = 0; nb < NB; nb++) for (int r = 0; r < MS; r++) begin
      @(negedge clk); b_we = 1; b_blk = 8'(kb*NB + nb); b_row = RW'(r);
      for (int j = 0; j < MS; j++) b_data[j*8 +: 8] = 8'(b[kb*MS + r][nb*MS + j]);
    end
    @(negedge clk); b_we = 0; start = 1; acc_clear = clr;
    @(negedge clk); start = 0; cyc = 0;
    while (busy) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != MS * MS) begin failures++; $display("iteration took %0d cycles", cyc); end
    foreach (acc[i, j]) begin
      int s = 0;
      for (int k = 0; k < K; k++) s += a[i][k] * b[k][j];
      acc[i][j] = clr ? s : acc[i][j] + s;
    end
    for (int mb = 0; mb < MB; mb++) for (int nb = 0; nb < NB; nb++) for (int r = 0; r < MS; r++) begin
      c_blk = 8'(mb*NB + nb); c_row = RW'(r); #1;
      for (int j = 0; j < MS; j++) begin
        checks++;
        if (signed'(c_data[j*32 +: 32]) != acc[mb*MS + r][nb*MS + j]) begin
          failures++;
          if (failures < 5) $display("C block %0d row %0d lane %0d: %0d, expected %0d", c_blk, r, j,
                                     signed'(c_data[j*32 +: 32]), acc[mb*MS + r][nb*MS + j]);
        end
      end
    end
  endtask
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    run(1); run(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
