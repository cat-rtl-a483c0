// tb_atb_unit: one attention block at MS = 4, LMAX = 16 with the default PU
// shapes (pre-stage 2 x 1 x 4, post-stage 2 x 4 x 2). Q, K, V are 16 x 8
// matrices (two heads of dh = 4) in a DRAM model with random back-pressure.
// Runs both heads one after the other and checks every byte of the merged O
// against the scalar reference (S = requant(Q_h K_h^T), row softmax,
// O_h = requant(P V_h)). Also checks that the other head's columns are not
// touched, and the compute time of each PU: 2 iterations of MS*MS cycles each.
module tb_atb_unit;
  import cat_pkg::*;
  import cat_ref_pkg::*;
  localparam int MS = 4, VW = MS * 8, L = 16, E = 8, DH = 4, EV = E / MS;
  localparam int QB = 0, KB = 32, VB = 64, OB = 96;
  localparam int SSH = 2, OSH = 7;
  logic clk = 0, rst_n = 0, start = 0, busy;
  atb_job_t job;
  logic [1:0] pu_active;
  logic dm_valid, dm_we, dm_ready, dm_rvalid;
  logic [31:0] dm_addr;
  logic [VW-1:0] dm_wdata, dm_rdata;
  int checks = 0, failures = 0, act0 = 0, act1 = 0;
  int q [L][E], k [L][E], v [L][E];
  always #5 clk = ~clk;
  always @(posedge clk) begin if (pu_active[0]) act0++; if (pu_active[1]) act1++; end

  atb_unit #(.MS(MS), .LMAX(L)) dut (.*);
  dram_model #(.VW(VW), .DEPTH(128), .LAT(4), .STALL_PCT(15)) u_m (
    .clk, .rst_n, .req_valid(dm_valid), .req_we(dm_we), .req_addr(dm_addr), .req_wdata(dm_wdata),
    .req_ready(dm_ready), .rsp_valid(dm_rvalid), .rsp_data(dm_rdata));

  initial begin repeat (200000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic int oget(int r, int c);
    return int'(signed'(u_m.mem[OB + r*EV + c/MS][(c%MS)*8 +: 8]));
  endfunction

  task automatic head(input int h);
    mat_t s;
    int o;
    act0 = 0; act1 = 0;
    job.q = '{base: QB + h, ld: EV}; job.k = '{base: KB + h, ld: EV};
    job.v = '{base: VB + h, ld: EV}; job.o = '{base: OB + h, ld: EV};
    job.l = L; job.dh = DH; job.s_shift = SSH; job.o_shift = OSH;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    s = new[L*L];
    for (int i = 0; i < L; i++) for (int j = 0; j < L; j++) begin
      longint acc = 0;
      for (int x = 0; x < DH; x++) acc += q[i][h*DH + x] * k[j][h*DH + x];
      s[i*L + j] = rq(acc, SSH);
    end
    for (int i = 0; i < L; i++) softmax_row(s, i*L, L);
    for (int i = 0; i < L; i++) for (int c = 0; c < DH; c++) begin
      longint acc = 0;
      for (int j = 0; j < L; j++) acc += s[i*L + j] * v[j][h*DH + c];
      o = rq(acc, OSH);
      checks++;
      if (oget(i, h*DH + c) != o) begin
        failures++;
        if (failures < 6) $display("head %0d O[%0d][%0d] = %0d, expected %0d", h, i, c, oget(i, h*DH + c), o);
      end
    end
    checks += 2;
    if (act0 != 2 * MS * MS) begin failures++; $display("pre-stage PU active %0d cycles", act0); end
    if (act1 != 2 * MS * MS) begin failures++; $display("post-stage PU active %0d cycles", act1); end
  endtask

  initial begin
    for (int i = 0; i < 128; i++) u_m.mem[i] = '0;
    for (int i = 0; i < L; i++) for (int j = 0; j < E; j++) begin
      q[i][j] = int'($urandom_range(255)) - 128; k[i][j] = int'($urandom_range(255)) - 128;
      v[i][j] = int'($urandom_range(255)) - 128;
      u_m.mem[QB + i*EV + j/MS][(j%MS)*8 +: 8] = 8'(q[i][j]);
      u_m.mem[KB + i*EV + j/MS][(j%MS)*8 +: 8] = 8'(k[i][j]);
      u_m.mem[VB + i*EV + j/MS][(j%MS)*8 +: 8] = 8'(v[i][j]);
    end
    repeat (3) @(negedge clk); rst_n = 1;
    head(1);
    for (int i = 0; i < L; i++) begin
      checks++;
      if (u_m.mem[OB + i*EV] != '0) begin failures++; $display("head 0 columns written by head 1"); end
    end
    head(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
