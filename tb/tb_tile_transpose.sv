// tb_tile_transpose: the K^T server at MS = 4 for a 16 x 8 K matrix (row
// length ld = 3 vecs, so a column slice of a wider matrix) held in a DRAM model
// with random back-pressure. Random requests (row r of K^T, column-vec c) must
// return K[c*MS + j][r]. A run of requests inside one tile must cost exactly
// MS memory reads; after flush the same tile is read again.
module tb_tile_transpose;
  import cat_pkg::*;
  localparam int MS = 4, VW = MS * 8, L = 16, DH = 8, LDV = 3, BASE = 5;
  logic clk = 0, rst_n = 0, flush = 0;
  mat_desc_t k_desc;
  logic req_valid = 0, req_ready, rsp_valid, m_valid, m_ready, m_rvalid;
  logic [15:0] req_row = '0, req_cvec = '0;
  logic [VW-1:0] rsp_data, m_rdata;
  logic [31:0] m_addr;
  int checks = 0, failures = 0, reads = 0;
  int kk [L][DH];
  always #5 clk = ~clk;
  always @(posedge clk) if (m_valid && m_ready) reads++;

  tile_transpose #(.MS(MS)) dut (.*);
  dram_model #(.VW(VW), .DEPTH(64), .LAT(3), .STALL_PCT(20)) u_m (
    .clk, .rst_n, .req_valid(m_valid), .req_we(1'b0), .req_addr(m_addr), .req_wdata('0),
    .req_ready(m_ready), .rsp_valid(m_rvalid), .rsp_data(m_rdata));

  initial begin repeat (50000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic ask(input int r, input int c);
    @(negedge clk); req_valid = 1; req_row = 16'(r); req_cvec = 16'(c);
    @(posedge clk); while (!req_ready) @(posedge clk);
    @(negedge clk); req_valid = 0;
    while (!rsp_valid) @(negedge clk);
    for (int j = 0; j < MS; j++) begin
      checks++;
      if (int'(signed'(rsp_data[j*8 +: 8])) != kk[c*MS + j][r]) begin
        failures++;
        if (failures < 6) $display("K^T[%0d][%0d] = %0d, expected %0d", r, c*MS + j, signed'(rsp_data[j*8 +: 8]), kk[c*MS + j][r]);
      end
    end
  endtask

  initial begin
    int r0;
    for (int i = 0; i < 64; i++) u_m.mem[i] = '0;
    foreach (kk[i, j]) begin kk[i][j] = int'($urandom_range(255)) - 128; u_m.mem[BASE + i*LDV + j/MS][(j%MS)*8 +: 8] = 8'(kk[i][j]); end
    k_desc = '{base: BASE, ld: LDV};
    repeat (3) @(negedge clk); rst_n = 1;
    // one tile: rows 4..7 of K^T, column-vec 2 -> MS reads
    r0 = reads;
    for (int r = 4; r < 8; r++) ask(r, 2);
    checks++;
    if (reads - r0 != MS) begin failures++; $display("one tile took %0d reads", reads - r0); end
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    r0 = reads;
    ask(5, 2);
    checks++;
    if (reads - r0 != MS) begin failures++; $display("no reload after flush"); end
    for (int n = 0; n < 60; n++) ask($urandom_range(DH - 1), $urandom_range(L/MS - 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
