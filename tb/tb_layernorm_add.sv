// tb_layernorm_add: Layernorm & Add at MS = 4, EMAX = 32, on a DRAM model with
// random back-pressure. Y = LN(A + R) for 5 rows of 32 with A, R and Y in
// separate regions; row 2 is constant (zero variance, output 0) and row 3
// has a single spike (normalised to sqrt(31) = 5.57, i.e. 89 in Q4). Checks every output byte against the scalar reference.
module tb_layernorm_add;
  import cat_pkg::*;
  import cat_ref_pkg::*;
  localparam int MS = 4, VW = MS * 8, ROWS = 5, COLS = 32, CV = COLS / MS;
  localparam int AB = 0, RB = 64, YB = 128;
  logic clk = 0, rst_n = 0, start = 0, busy;
  ln_job_t job;
  logic req_valid, req_we, req_ready, rsp_valid;
  logic [31:0] req_addr;
  logic [VW-1:0] req_wdata, rsp_data;
  int checks = 0, failures = 0;
  mat_t a, r, y;
  always #5 clk = ~clk;

  layernorm_add #(.MS(MS), .EMAX(COLS)) dut (.*);
  dram_model #(.VW(VW), .DEPTH(256), .LAT(4), .STALL_PCT(20)) u_m (
    .clk, .rst_n, .req_valid, .req_we, .req_addr, .req_wdata, .req_ready, .rsp_valid, .rsp_data);

  initial begin repeat (50000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    a = new[ROWS*COLS]; r = new[ROWS*COLS];
    foreach (a[i]) begin a[i] = int'($urandom_range(255)) - 128; r[i] = int'($urandom_range(255)) - 128; end
    for (int j = 0; j < COLS; j++) begin a[2*COLS + j] = 7; r[2*COLS + j] = -3; end
    for (int j = 0; j < COLS; j++) begin a[3*COLS + j] = 0; r[3*COLS + j] = 0; end
    a[3*COLS + 5] = 127;
    for (int i = 0; i < 256; i++) u_m.mem[i] = '0;
    for (int i = 0; i < ROWS; i++) for (int j = 0; j < COLS; j++) begin
      u_m.mem[AB + i*CV + j/MS][(j%MS)*8 +: 8] = 8'(a[i*COLS + j]);
      u_m.mem[RB + i*CV + j/MS][(j%MS)*8 +: 8] = 8'(r[i*COLS + j]);
    end
    job.a = '{base: AB, ld: CV}; job.r = '{base: RB, ld: CV}; job.y = '{base: YB, ld: CV};
    job.rows = ROWS; job.cols = COLS;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    y = ln_add(a, r, ROWS, COLS);
    for (int i = 0; i < ROWS; i++) for (int j = 0; j < COLS; j++) begin
      automatic int got = int'(signed'(u_m.mem[YB + i*CV + j/MS][(j%MS)*8 +: 8]));
      checks++;
      if (got != y[i*COLS + j]) begin failures++; if (failures < 8) $display("y[%0d][%0d] = %0d, expected %0d", i, j, got, y[i*COLS + j]); end
    end
    checks++;
    if (y[3*COLS + 5] < 88 || y[3*COLS + 5] > 90) begin failures++; $display("spike normalised to %0d", y[3*COLS + 5]); end
    checks++;
    for (int j = 0; j < COLS; j++) if (y[2*COLS + j] != 0) begin failures++; break; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
