// atb_unit: Attention Block (ATB) of the EDPU (Sec. III-B and Fig. 3 of the
// paper). One job computes the attention of one head:
//   S = requant(Q_h * K_h^T)   PRG 1: pre-stage PU, K through the Transpose
//   P = softmax(S)             SoftMax on the Attn Buffer, in place
//   O_h = requant(P * V_h)     PRG 2: post-stage PU, written to the merged O
// Q_h, K_h, V_h and O_h are column slices of L x E matrices in DRAM.
//
// PU sizes follow the paper's BERT-Base design (Sec. V-B) as far as they can:
// the pre-stage uses two Small PUs, taken together as one 2 x 1 x 4 kernel
// group (8 kernels), and the post-stage one Standard PU (2 x 4 x 2, 16
// kernels), so that four ATBs hold 96 kernels and the EDPU 352, the numbers of
// Table V. (The text says "two Standard" for the post-stage, which would need
// 416 of the 400 kernels; the kernel count was followed.)
//
// The Q/K/V buffers of Fig. 3 are not separate memories here: the PRGs read
// Q, K and V straight from DRAM, the merged output goes back to DRAM. The
// three steps run in sequence. All DRAM traffic of the block goes through one
// 4-way mem_arbiter to the dm_* port.
//
// Interface: start with job (cat_pkg::atb_job_t) while idle; busy until O_h is
// written; pu_active shows which of the two PUs is computing. l <= LMAX, l a multiple of 2*MS (pre-stage M tile), dh = MS.
// The lint note that rst_n is used both synchronously and asynchronously
// comes from the handshake assertion inside mem_arbiter (disable iff on
// rst_n); the flops themselves all reset asynchronously.
module atb_unit
  import cat_pkg::*;
#(
  parameter int MS   = 64,
  parameter int LMAX = 256,
  parameter int MB1  = 2,
  parameter int KB1  = 1,
  parameter int NB1  = 4,
  parameter int MB2  = 2,
  parameter int KB2  = 4,
  parameter int NB2  = 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  atb_job_t        job,
  output logic            busy,
  output logic [1:0]      pu_active,
  output logic            dm_valid,
  output logic            dm_we,
  output logic [31:0]     dm_addr,
  output logic [MS*8-1:0] dm_wdata,
  input  logic            dm_ready,
  input  logic            dm_rvalid,
  input  logic [MS*8-1:0] dm_rdata
);
  localparam int VW = MS * 8;
  localparam int AD = LMAX * LMAX / MS;

  typedef enum logic [2:0] {A_IDLE, A_QK, A_WQK, A_SM, A_WSM, A_PV, A_WPV} st_e;
  st_e st;
  atb_job_t jq;

  // job descriptors of the two PRGs
  mat_desc_t attn;
  mm_job_t   j1, j2;
  always_comb begin
    attn = '{base: 32'd0, ld: 16'(jq.l / 16'(MS))};
    j1 = '{a: jq.q, b: '{base: 32'd0, ld: 16'd0}, c: attn, m: jq.l, k: jq.dh, n: jq.l,
           n_first: 8'd0, n_step: 8'd1, shift: jq.s_shift, post: POST_NONE};
    j2 = '{a: attn, b: jq.v, c: jq.o, m: jq.l, k: jq.l, n: jq.dh,
           n_first: 8'd0, n_step: 8'd1, shift: jq.o_shift, post: POST_NONE};
  end

  // PRG 1 ports
  logic p1_busy, p1a_v, p1a_rdy, p1a_rv, p1b_v, p1b_rdy, p1b_rv, p1c_v, p1c_rdy;
  logic [31:0] p1a_addr, p1b_addr, p1c_addr;
  logic [15:0] p1a_row, p1a_cvec, p1b_row, p1b_cvec;
  logic [VW-1:0] p1a_rd, p1b_rd, p1c_d;
  // PRG 2 ports
  logic p2_busy, p2a_v, p2a_rdy, p2a_rv, p2b_v, p2b_rdy, p2b_rv, p2c_v, p2c_rdy;
  logic [31:0] p2a_addr, p2b_addr, p2c_addr;
  logic [15:0] p2a_row, p2a_cvec, p2b_row, p2b_cvec;
  logic [VW-1:0] p2a_rd, p2b_rd, p2c_d;
  // transpose downstream
  logic tr_mv, tr_mrdy, tr_mrv;
  logic [31:0] tr_maddr;
  logic [VW-1:0] tr_mrd;
  // softmax port
  logic sm_busy, sm_v, sm_we, sm_rdy, sm_rv;
  logic [31:0] sm_addr;
  logic [VW-1:0] sm_wd, sm_rd;
  // attention buffer port
  logic ab_v, ab_we, ab_rdy, ab_rv;
  logic [31:0] ab_addr;
  logic [VW-1:0] ab_wd, ab_rd;

  mm_prg #(.MS(MS), .MB(MB1), .KB(KB1), .NB(NB1)) u_prg_qk (
    .clk, .rst_n, .start(st == A_QK), .job(j1), .busy(p1_busy), .pu_active(pu_active[0]),
    .a_req_valid(p1a_v), .a_req_addr(p1a_addr), .a_req_row(p1a_row), .a_req_cvec(p1a_cvec),
    .a_req_ready(p1a_rdy), .a_rsp_valid(p1a_rv), .a_rsp_data(p1a_rd),
    .b_req_valid(p1b_v), .b_req_addr(p1b_addr), .b_req_row(p1b_row), .b_req_cvec(p1b_cvec),
    .b_req_ready(p1b_rdy), .b_rsp_valid(p1b_rv), .b_rsp_data(p1b_rd),
    .c_req_valid(p1c_v), .c_req_addr(p1c_addr), .c_req_data(p1c_d), .c_req_ready(p1c_rdy)
  );

  tile_transpose #(.MS(MS)) u_tr (
    .clk, .rst_n, .flush(st == A_QK), .k_desc(jq.k),
    .req_valid(p1b_v), .req_row(p1b_row), .req_cvec(p1b_cvec), .req_ready(p1b_rdy),
    .rsp_valid(p1b_rv), .rsp_data(p1b_rd),
    .m_valid(tr_mv), .m_addr(tr_maddr), .m_ready(tr_mrdy), .m_rvalid(tr_mrv), .m_rdata(tr_mrd)
  );

  softmax_unit #(.MS(MS)) u_sm (
    .clk, .rst_n, .start(st == A_SM), .base(attn.base), .ld(attn.ld), .rows(jq.l), .len(jq.l),
    .busy(sm_busy), .req_valid(sm_v), .req_we(sm_we), .req_addr(sm_addr), .req_wdata(sm_wd),
    .req_ready(sm_rdy), .rsp_valid(sm_rv), .rsp_data(sm_rd)
  );

  mm_prg #(.MS(MS), .MB(MB2), .KB(KB2), .NB(NB2)) u_prg_pv (
    .clk, .rst_n, .start(st == A_PV), .job(j2), .busy(p2_busy), .pu_active(pu_active[1]),
    .a_req_valid(p2a_v), .a_req_addr(p2a_addr), .a_req_row(p2a_row), .a_req_cvec(p2a_cvec),
    .a_req_ready(p2a_rdy), .a_rsp_valid(p2a_rv), .a_rsp_data(p2a_rd),
    .b_req_valid(p2b_v), .b_req_addr(p2b_addr), .b_req_row(p2b_row), .b_req_cvec(p2b_cvec),
    .b_req_ready(p2b_rdy), .b_rsp_valid(p2b_rv), .b_rsp_data(p2b_rd),
    .c_req_valid(p2c_v), .c_req_addr(p2c_addr), .c_req_data(p2c_d), .c_req_ready(p2c_rdy)
  );

  // Attn Buffer, shared by phase: PRG 1 writes, softmax reads/writes, PRG 2 reads
  always_comb begin
    ab_v = 1'b0; ab_we = 1'b0; ab_addr = '0; ab_wd = '0;
    if (st == A_WQK) begin
      ab_v = p1c_v; ab_we = 1'b1; ab_addr = p1c_addr; ab_wd = p1c_d;
    end else if (st == A_WSM) begin
      ab_v = sm_v; ab_we = sm_we; ab_addr = sm_addr; ab_wd = sm_wd;
    end else if (st == A_WPV) begin
      ab_v = p2a_v; ab_we = 1'b0; ab_addr = p2a_addr;
    end
  end
  assign p1c_rdy = (st == A_WQK) && ab_rdy;
  assign sm_rdy  = (st == A_WSM) && ab_rdy;
  assign p2a_rdy = (st == A_WPV) && ab_rdy;
  assign sm_rv   = (st == A_WSM) && ab_rv;
  assign sm_rd   = ab_rd;
  assign p2a_rv  = (st == A_WPV) && ab_rv;
  assign p2a_rd  = ab_rd;

  vec_ram #(.MS(MS), .DEPTH(AD)) u_attn (
    .clk, .rst_n, .req_valid(ab_v), .req_we(ab_we), .req_addr(ab_addr), .req_wdata(ab_wd),
    .req_ready(ab_rdy), .rsp_valid(ab_rv), .rsp_data(ab_rd)
  );

  // DRAM side: Q reads, K reads (transpose), V reads, O writes
  logic          m_valid [4], m_we [4], m_ready [4], m_rvalid [4];
  logic [31:0]   m_addr  [4];
  logic [VW-1:0] m_wdata [4], m_rdata [4];
  always_comb begin
    m_valid[0] = p1a_v; m_we[0] = 1'b0; m_addr[0] = p1a_addr; m_wdata[0] = '0;
    m_valid[1] = tr_mv; m_we[1] = 1'b0; m_addr[1] = tr_maddr; m_wdata[1] = '0;
    m_valid[2] = p2b_v; m_we[2] = 1'b0; m_addr[2] = p2b_addr; m_wdata[2] = '0;
    m_valid[3] = p2c_v; m_we[3] = 1'b1; m_addr[3] = p2c_addr; m_wdata[3] = p2c_d;
  end
  assign p1a_rdy = m_ready[0]; assign p1a_rv = m_rvalid[0]; assign p1a_rd = m_rdata[0];
  assign tr_mrdy = m_ready[1]; assign tr_mrv = m_rvalid[1]; assign tr_mrd = m_rdata[1];
  assign p2b_rdy = m_ready[2]; assign p2b_rv = m_rvalid[2]; assign p2b_rd = m_rdata[2];
  assign p2c_rdy = m_ready[3];

  mem_arbiter #(.N(4), .VW(VW)) u_arb (
    .clk, .rst_n, .m_valid, .m_we, .m_addr, .m_wdata, .m_ready, .m_rvalid, .m_rdata,
    .s_valid(dm_valid), .s_we(dm_we), .s_addr(dm_addr), .s_wdata(dm_wdata),
    .s_ready(dm_ready), .s_rvalid(dm_rvalid), .s_rdata(dm_rdata)
  );

  assign busy = (st != A_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= A_IDLE; jq <= '0;
    end else begin
      case (st)
        A_IDLE: if (start) begin jq <= job; st <= A_QK; end
        A_QK:   st <= A_WQK;
        A_WQK:  if (!p1_busy) st <= A_SM;
        A_SM:   st <= A_WSM;
        A_WSM:  if (!sm_busy) st <= A_PV;
        A_PV:   st <= A_WPV;
        A_WPV:  if (!p2_busy) st <= A_IDLE;
        default: st <= A_IDLE;
      endcase
    end
  end
endmodule
