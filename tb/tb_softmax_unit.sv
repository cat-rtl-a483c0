// tb_softmax_unit: row softmax at MS = 4 on a buffer modelled by a DRAM model
// with random back-pressure. Rows of 12 scores (three vecs, ld 4 so the
// unused vec of every row must stay untouched) include a flat row, a row with
// one dominant score and random rows. Checks every probability against the
// scalar reference and that each row sums to about 127.
module tb_softmax_unit;
  import cat_ref_pkg::*;
  localparam int MS = 4, VW = MS * 8, ROWS = 6, LEN = 12, LDV = 4, BASE = 7;
  logic clk = 0, rst_n = 0, start = 0, busy;
  logic [31:0] base;
  logic [15:0] ld, rows, len;
  logic req_valid, req_we, req_ready, rsp_valid;
  logic [31:0] req_addr;
  logic [VW-1:0] req_wdata, rsp_data;
  int checks = 0, failures = 0;
  mat_t s;
  always #5 clk = ~clk;

  softmax_unit #(.MS(MS)) dut (.*);
  dram_model #(.VW(VW), .DEPTH(64), .LAT(3), .STALL_PCT(20)) u_m (
    .clk, .rst_n, .req_valid, .req_we, .req_addr, .req_wdata, .req_ready, .rsp_valid, .rsp_data);

  initial begin repeat (50000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    s = new[ROWS * LEN];
    foreach (s[i]) s[i] = int'($urandom_range(255)) - 128;
    for (int j = 0; j < LEN; j++) begin s[j] = 5; s[LEN + j] = -100; end
    s[LEN + 3] = 120;
    for (int j = 0; j < LEN; j++) s[2*LEN + j] = int'($urandom_range(40)) - 20;
    for (int i = 0; i < 64; i++) u_m.mem[i] = {VW{1'b1}};
    for (int r = 0; r < ROWS; r++) for (int j = 0; j < LEN; j++) u_m.mem[BASE + r*LDV + j/MS][(j%MS)*8 +: 8] = 8'(s[r*LEN + j]);
    base = BASE; ld = LDV; rows = ROWS; len = LEN;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    for (int r = 0; r < ROWS; r++) softmax_row(s, r * LEN, LEN);
    for (int r = 0; r < ROWS; r++) begin
      automatic int sum = 0;
      for (int j = 0; j < LEN; j++) begin
        automatic int got = int'(signed'(u_m.mem[BASE + r*LDV + j/MS][(j%MS)*8 +: 8]));
        sum += got;
        checks++;
        if (got != s[r*LEN + j]) begin failures++; $display("row %0d p[%0d] = %0d, expected %0d", r, j, got, s[r*LEN + j]); end
      end
      checks += 2;
      if (sum < 127 - LEN || sum > 127 + LEN) begin failures++; $display("row %0d sums to %0d", r, sum); end
      if (u_m.mem[BASE + r*LDV + 3] != {VW{1'b1}}) begin failures++; $display("row %0d: vec beyond len written", r); end
    end
    checks++;
    if (s[LEN + 3] < 120) begin failures++; $display("dominant score got %0d", s[LEN + 3]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
