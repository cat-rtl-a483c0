// tb_mem_arbiter: three masters share one DRAM model (random back-pressure,
// latency 4) through the arbiter. Each master issues random writes and reads
// in its own region as fast as it is allowed and checks every read against
// its shadow copy, so a response routed to the wrong master or out of order
// fails. Also checks that every master is served and that some cycles had
// more than one requester (contention).
module tb_mem_arbiter;
  localparam int N = 3, VW = 32, REG = 32, OPS = 300;
  logic clk = 0, rst_n = 0;
  logic m_valid [N], m_we [N], m_ready [N], m_rvalid [N];
  logic [31:0] m_addr [N];
  logic [VW-1:0] m_wdata [N], m_rdata [N];
  logic s_valid, s_we, s_ready, s_rvalid;
  logic [31:0] s_addr;
  logic [VW-1:0] s_wdata, s_rdata;
  int checks = 0, failures = 0, contention = 0;
  int done_ops [N] = '{default: 0};
  always #5 clk = ~clk;

  mem_arbiter #(.N(N), .VW(VW), .FD(4)) dut (.*);
  dram_model #(.VW(VW), .DEPTH(N*REG), .LAT(4), .STALL_PCT(25)) u_m (
    .clk, .rst_n, .req_valid(s_valid), .req_we(s_we), .req_addr(s_addr), .req_wdata(s_wdata),
    .req_ready(s_ready), .rsp_valid(s_rvalid), .rsp_data(s_rdata));

  always @(posedge clk) begin
    int nv;
    nv = 0;
    for (int i = 0; i < N; i++) nv += m_valid[i] ? 1 : 0;
    if (nv > 1) contention++;
  end

  initial begin repeat (40000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  for (genvar g = 0; g < N; g++) begin : g_m
    logic [VW-1:0] shadow [REG];
    logic [VW-1:0] expq [$];
    initial begin
      m_valid[g] = 0; m_we[g] = 0; m_addr[g] = '0; m_wdata[g] = '0;
      for (int i = 0; i < REG; i++) begin shadow[i] = VW'(g * 1000 + i); u_m.mem[g*REG + i] = shadow[i]; end
      @(posedge rst_n);
      for (int n = 0; n < OPS; n++) begin
        int a;
        @(negedge clk);
        a = $urandom_range(REG - 1);
        m_valid[g] = 1; m_we[g] = ($urandom_range(2) == 0); m_addr[g] = 32'(g*REG + a); m_wdata[g] = VW'($urandom);
        // m_ready is stable from just after the falling edge to the rising one
        forever begin
          logic acc;
          #1 acc = m_ready[g];
          @(posedge clk);
          if (acc) break;
          @(negedge clk);
        end
        if (m_we[g]) shadow[a] = m_wdata[g]; else expq.push_back(shadow[a]);
        done_ops[g]++;
      end
      @(negedge clk); m_valid[g] = 0;
    end
    always @(negedge clk) if (m_rvalid[g]) begin
      checks++;
      if (expq.size() == 0) begin failures++; $display("master %0d: response without request", g); end
      else begin
        logic [VW-1:0] e;
        e = expq.pop_front();
        if (m_rdata[g] != e) begin failures++; if (failures < 6) $display("master %0d read %h, expected %h", g, m_rdata[g], e); end
      end
    end
  end

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    wait (done_ops[0] == OPS && done_ops[1] == OPS && done_ops[2] == OPS);
    repeat (20) @(negedge clk);
    checks += 2;
    if (g_m[0].expq.size() + g_m[1].expq.size() + g_m[2].expq.size() != 0) begin failures++; $display("reads never answered"); end
    if (contention == 0) begin failures++; $display("no contention seen"); end
    $display("contention cycles %0d", contention);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
