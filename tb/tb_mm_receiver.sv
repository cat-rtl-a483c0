// tb_mm_receiver: the Receiver at MS = 4 with a 2 x 2 output block grid. The
// PU's C windows are modelled by a table of random int32 rows read through
// pu_c_blk/pu_c_row; the destination is a DRAM model with random
// back-pressure. For full and partial tiles, with and without GELU, checks
// every written byte against requantise(+GELU) of the table, and that nothing
// outside the valid blocks is written.
module tb_mm_receiver;
  import cat_pkg::*;
  import cat_ref_pkg::*;
  localparam int MS = 4, MB = 2, NB = 2, VW = MS * 8, RW = 2;
  localparam int LDV = 8;   // destination row length in vecs
  logic clk = 0, rst_n = 0, start = 0, busy;
  mat_desc_t c_desc;
  logic [15:0] mt, nt;
  logic [7:0] mb_valid, nb_valid;
  logic [4:0] shift;
  post_op_e post;
  logic [7:0] pu_c_blk;
  logic [RW-1:0] pu_c_row;
  logic [MS*32-1:0] pu_c_data;
  logic req_valid, req_ready, rsp_valid;
  logic [31:0] req_addr;
  logic [VW-1:0] req_data, rsp_data;
  int checks = 0, failures = 0;
  int cv [MB*NB][MS][MS];
  always #5 clk = ~clk;

  always_comb for (int j = 0; j < MS; j++) pu_c_data[j*32 +: 32] = 32'(cv[pu_c_blk][pu_c_row][j]);

  mm_receiver #(.MS(MS), .MB(MB), .NB(NB)) dut (.*);
  dram_model #(.VW(VW), .DEPTH(512), .LAT(2), .STALL_PCT(30)) u_c (
    .clk, .rst_n, .req_valid, .req_we(1'b1), .req_addr, .req_wdata(req_data),
    .req_ready, .rsp_valid, .rsp_data);

  initial begin repeat (50000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic run(input int m_t, input int n_t, input int mbv, input int nbv, input int sh, input post_op_e p);
    foreach (cv[i, r, j]) cv[i][r][j] = int'($urandom_range(200000)) - 100000;
    for (int i = 0; i < 512; i++) u_c.mem[i] = {VW{1'b1}};
    mt = 16'(m_t); nt = 16'(n_t); mb_valid = 8'(mbv); nb_valid = 8'(nbv); shift = 5'(sh); post = p;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    @(negedge clk);
    for (int mb = 0; mb < MB; mb++) for (int n_b = 0; n_b < NB; n_b++) for (int r = 0; r < MS; r++) begin
      int addr = 16 + ((m_t*MB + mb)*MS + r) * LDV + n_t*NB + n_b;
      logic [VW-1:0] w = u_c.mem[addr];
      if (mb < mbv && n_b < nbv) begin
        for (int j = 0; j < MS; j++) begin
          int e = rq(longint'(cv[mb*NB + n_b][r][j]), sh);
          if (p == POST_GELU) e = gelu(e);
          checks++;
          if (int'(signed'(w[j*8 +: 8])) != e) begin
            failures++;
            if (failures < 6) $display("blk %0d row %0d lane %0d: %0d, expected %0d", mb*NB+n_b, r, j, signed'(w[j*8 +: 8]), e);
          end
        end
      end else begin
        checks++;
        if (w != {VW{1'b1}}) begin failures++; $display("invalid block %0d row %0d was written", mb*NB+n_b, r); end
      end
    end
  endtask

  initial begin
    c_desc = '{base: 32'd16, ld: 16'(LDV)};
    repeat (3) @(negedge clk); rst_n = 1;
    run(0, 0, 2, 2, 10, POST_NONE);
    run(1, 1, 1, 2, 12, POST_NONE);
    run(2, 0, 2, 1, 9, POST_GELU);
    run(0, 2, 2, 2, 0, POST_NONE);   // shift 0: saturation
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
