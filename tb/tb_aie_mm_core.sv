// tb_aie_mm_core: one kernel at MS = 8. Loads random A and B, runs with
// acc_clear and checks C = A*B and the MS*MS-cycle compute time, then loads new
// data, runs without acc_clear and checks C = A*B + A'*B'.
module tb_aie_mm_core;
  localparam int MS = 8, RW = $clog2(MS);
  logic clk = 0, rst_n = 0, a_we = 0, b_we = 0, start = 0, acc_clear = 0, busy;
  logic [RW-1:0] a_row = '0, b_row = '0, c_row = '0;
  logic [MS*8-1:0] a_data = '0, b_data = '0;
  logic [MS*32-1:0] c_data;
  int checks = 0, failures = 0;
  int a [MS][MS], b [MS][MS], acc [MS][MS];
  always #5 clk = ~clk;
  aie_mm_core #(.MS(MS)) dut (.*);
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic run(input bit clr);
    int cyc;
    for (int i = 0; i < MS; i++) for (int j = 0; j < MS; j++) begin
      a[i][j] = int'($urandom_range(255)) - 128; b[i][j] = int'($urandom_range(255)) - 128;
    end
    for (int i = 0; i < MS; i++) begin
      @(negedge clk); a_we = 1; b_we = 1; a_row = RW'(i); b_row = RW'(i);
      for (int j = 0; j < MS; j++) begin a_data[j*8 +: 8] = 8'(a[i][j]); b_data[j*8 +: 8] = 8'(b[i][j]); end
    end
    @(negedge clk); a_we = 0; b_we = 0; start = 1; acc_clear = clr;
    @(negedge clk); start = 0; cyc = 0;
    while (busy) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != MS * MS) begin failures++; $display("compute took %0d cycles, expected %0d", cyc, MS*MS); end
    for (int i = 0; i < MS; i++) for (int j = 0; j < MS; j++) begin
      int s = 0;
      for (int k = 0; k < MS; k++) s += a[i][k] * b[k][j];
      acc[i][j] = clr ? s : acc[i][j] + s;
    end
    for (int i = 0; i < MS; i++) begin
      c_row = RW'(i); #1;
      for (int j = 0; j < MS; j++) begin
        checks++;
        if (signed'(c_data[j*32 +: 32]) != acc[i][j]) begin
          failures++;
          if (failures < 5) $display("C[%0d][%0d] = %0d, expected %0d", i, j, signed'(c_data[j*32 +: 32]), acc[i][j]);
        end
      end
    end
  endtask
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    run(1); run(0); run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
