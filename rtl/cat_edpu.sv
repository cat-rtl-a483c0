// cat_edpu: Encoder/Decoder Processing Unit (EDPU), the top of this design.
// One run computes one Transformer encoder layer for cfg.batch sequences:
//   Tmp = LN(X + Proj(MHA(X)))           Multi-Head Attention stage
//   Res = LN(Tmp + GELU(Tmp W1) W2)      Feed Forward Network stage
// The two stages run one after the other (Algorithm 1 of the paper) and share
// the four Large-PU linear blocks.
//
// Contents (Fig. 2 and Fig. 3 of the paper, BERT-Base design of Sec. V-B):
//   4 linear blocks (mm_prg with a Large 4x4x4 PU, 64 kernels each): Q, K, V
//     and Proj in the MHA stage, FFN1 (x2) and FFN2 (x2) in the FFN stage;
//   P_ATB attention blocks (atb_unit, 24 kernels each);
//   one Layernorm & Add unit, used at the end of both stages;
//   the MHA and FFN controllers, whose job ports are multiplexed onto the
//     shared units by the current stage;
//   one round-robin arbiter that merges all data movers onto the DRAM port.
// With the defaults the EDPU holds 4*64 + 4*24 = 352 kernels.
//
// The host (CPU, runtime, PCIe) and the DRAM are outside: the host writes the
// weights and inputs into DRAM, sets cfg and pulses start; busy falls when
// Res is in DRAM. DRAM port: vec port (valid/we/addr/wdata, ready; reads
// answered in order on rvalid/rdata); an address counts MS-byte vecs.
// Counters: cycles spent in each stage and kernel-cycles in which kernels
// computed, from which the AIE effective utilisation rate of Eq. 2 follows.
// Status: which linear blocks, attention blocks and the Layernorm & Add unit
// are busy, and whether the FFN stage is running.
// The lint note that rst_n is used both synchronously and asynchronously
// comes from the handshake assertion inside mem_arbiter (disable iff on
// rst_n); the flops themselves all reset asynchronously.
module cat_edpu
  import cat_pkg::*;
#(
  parameter int MS    = 64,   // MMSZ_AIE
  parameter int P_ATB = 4,    // ATB parallelism
  parameter int LMAX  = 256,  // longest sequence an Attn Buffer holds
  parameter int EMAX  = 768   // longest row of Layernorm & Add
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  edpu_cfg_t       cfg,
  output logic            busy,
  output logic            dram_valid,
  output logic            dram_we,
  output logic [31:0]     dram_addr,
  output logic [MS*8-1:0] dram_wdata,
  input  logic            dram_ready,
  input  logic            dram_rvalid,
  input  logic [MS*8-1:0] dram_rdata,
  output logic [31:0]     mha_cycles,
  output logic [31:0]     ffn_cycles,
  output logic [47:0]     kernel_cycles,
  output logic [3:0]      lb_active,
  output logic [P_ATB-1:0] atb_active,
  output logic            ln_active,
  output logic            ffn_stage
);
  localparam int VW = MS * 8;
  localparam int NM = 13 + P_ATB;
  localparam int K_LARGE = 64, K_PRE = 8, K_POST = 16;

  typedef enum logic [2:0] {E_IDLE, E_MHA, E_MHA_W, E_FFN, E_FFN_W} est_e;
  est_e est;

  // controller <-> unit job ports
  logic     m_lb_start [4], f_lb_start [4], lb_start [4], lb_busy [4], lb_pu [4];
  mm_job_t  m_lb_job [4], f_lb_job [4], lb_job [4];
  logic     atb_start [P_ATB], atb_busy [P_ATB];
  atb_job_t atb_job [P_ATB];
  logic [1:0] atb_pu [P_ATB];
  logic     m_ln_start, f_ln_start, ln_start, ln_busy, mha_busy, ffn_busy;
  ln_job_t  m_ln_job, f_ln_job, ln_job;

  mha_controller #(.MS(MS), .NBL(4), .P_ATB(P_ATB)) u_mha (
    .clk, .rst_n, .start(est == E_MHA), .cfg, .busy(mha_busy),
    .lb_start(m_lb_start), .lb_job(m_lb_job), .lb_busy,
    .atb_start, .atb_job, .atb_busy,
    .ln_start(m_ln_start), .ln_job(m_ln_job), .ln_busy
  );

  ffn_controller #(.MS(MS)) u_ffn (
    .clk, .rst_n, .start(est == E_FFN), .cfg, .busy(ffn_busy),
    .lb_start(f_lb_start), .lb_job(f_lb_job), .lb_busy,
    .ln_start(f_ln_start), .ln_job(f_ln_job), .ln_busy
  );

  // stage multiplexing of the shared units
  logic in_ffn;
  assign in_ffn = (est == E_FFN) || (est == E_FFN_W);
  always_comb begin
    for (int i = 0; i < 4; i++) begin
      lb_start[i] = in_ffn ? f_lb_start[i] : m_lb_start[i];
      lb_job[i]   = in_ffn ? f_lb_job[i]   : m_lb_job[i];
    end
    ln_start = in_ffn ? f_ln_start : m_ln_start;
    ln_job   = in_ffn ? f_ln_job   : m_ln_job;
  end

  // DRAM masters: LB i -> 3i (A), 3i+1 (B), 3i+2 (C); ATB i -> 12+i; LN -> 12+P_ATB
  logic          mv [NM], mwe [NM], mrdy [NM], mrv [NM];
  logic [31:0]   maddr [NM];
  logic [VW-1:0] mwd [NM], mrd [NM];

  for (genvar i = 0; i < 4; i++) begin : g_lb
    logic          av, bv, cv;
    logic [31:0]   aa, ba, ca;
    logic [15:0]   ar, ac, br, bc;
    logic [VW-1:0] cd;
    mm_prg #(.MS(MS), .MB(4), .KB(4), .NB(4)) u_lb (
      .clk, .rst_n, .start(lb_start[i]), .job(lb_job[i]), .busy(lb_busy[i]), .pu_active(lb_pu[i]),
      .a_req_valid(av), .a_req_addr(aa), .a_req_row(ar), .a_req_cvec(ac),
      .a_req_ready(mrdy[3*i]), .a_rsp_valid(mrv[3*i]), .a_rsp_data(mrd[3*i]),
      .b_req_valid(bv), .b_req_addr(ba), .b_req_row(br), .b_req_cvec(bc),
      .b_req_ready(mrdy[3*i+1]), .b_rsp_valid(mrv[3*i+1]), .b_rsp_data(mrd[3*i+1]),
      .c_req_valid(cv), .c_req_addr(ca), .c_req_data(cd), .c_req_ready(mrdy[3*i+2])
    );
    assign mv[3*i]   = av; assign mwe[3*i]   = 1'b0; assign maddr[3*i]   = aa; assign mwd[3*i]   = '0;
    assign mv[3*i+1] = bv; assign mwe[3*i+1] = 1'b0; assign maddr[3*i+1] = ba; assign mwd[3*i+1] = '0;
    assign mv[3*i+2] = cv; assign mwe[3*i+2] = 1'b1; assign maddr[3*i+2] = ca; assign mwd[3*i+2] = cd;
  end

  for (genvar i = 0; i < P_ATB; i++) begin : g_atb
    atb_unit #(.MS(MS), .LMAX(LMAX)) u_atb (
      .clk, .rst_n, .start(atb_start[i]), .job(atb_job[i]), .busy(atb_busy[i]), .pu_active(atb_pu[i]),
      .dm_valid(mv[12+i]), .dm_we(mwe[12+i]), .dm_addr(maddr[12+i]), .dm_wdata(mwd[12+i]),
      .dm_ready(mrdy[12+i]), .dm_rvalid(mrv[12+i]), .dm_rdata(mrd[12+i])
    );
  end

  layernorm_add #(.MS(MS), .EMAX(EMAX)) u_ln (
    .clk, .rst_n, .start(ln_start), .job(ln_job), .busy(ln_busy),
    .req_valid(mv[12+P_ATB]), .req_we(mwe[12+P_ATB]), .req_addr(maddr[12+P_ATB]),
    .req_wdata(mwd[12+P_ATB]), .req_ready(mrdy[12+P_ATB]),
    .rsp_valid(mrv[12+P_ATB]), .rsp_data(mrd[12+P_ATB])
  );

  mem_arbiter #(.N(NM), .VW(VW), .FD(32)) u_arb (
    .clk, .rst_n, .m_valid(mv), .m_we(mwe), .m_addr(maddr), .m_wdata(mwd),
    .m_ready(mrdy), .m_rvalid(mrv), .m_rdata(mrd),
    .s_valid(dram_valid), .s_we(dram_we), .s_addr(dram_addr), .s_wdata(dram_wdata),
    .s_ready(dram_ready), .s_rvalid(dram_rvalid), .s_rdata(dram_rdata)
  );

  assign busy = (est != E_IDLE);
  assign ffn_stage = in_ffn;
  assign ln_active = ln_busy;
  always_comb begin
    for (int i = 0; i < 4; i++) lb_active[i] = lb_busy[i];
    for (int i = 0; i < P_ATB; i++) atb_active[i] = atb_busy[i];
  end

  // kernels computing in this cycle
  logic [15:0] k_now;
  always_comb begin
    k_now = '0;
    for (int i = 0; i < 4; i++) k_now += lb_pu[i] ? 16'(K_LARGE) : 16'd0;
    for (int i = 0; i < P_ATB; i++)
      k_now += (atb_pu[i][0] ? 16'(K_PRE) : 16'd0) + (atb_pu[i][1] ? 16'(K_POST) : 16'd0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      est <= E_IDLE; mha_cycles <= '0; ffn_cycles <= '0; kernel_cycles <= '0;
    end else begin
      if (est == E_MHA || est == E_MHA_W) mha_cycles <= mha_cycles + 1'b1;
      if (est == E_FFN || est == E_FFN_W) ffn_cycles <= ffn_cycles + 1'b1;
      kernel_cycles <= kernel_cycles + 48'(k_now);
      case (est)
        E_IDLE: if (start) begin
          est <= E_MHA; mha_cycles <= '0; ffn_cycles <= '0; kernel_cycles <= '0;
        end
        E_MHA:   est <= E_MHA_W;
        E_MHA_W: if (!mha_busy) est <= E_FFN;
        E_FFN:   est <= E_FFN_W;
        E_FFN_W: if (!ffn_busy) est <= E_IDLE;
        default: est <= E_IDLE;
      endcase
    end
  end
endmodule
