// mm_prg: a Parallel Region (PRG), the smallest scheduling unit of the EDPU
// (Sec. III-B and the orange regions of Fig. 3 of the paper): Sender, one AIE
// MM PU and Receiver, run as one GEMM engine.
//
// A job (cat_pkg::mm_job_t) asks for C = requant(A * B) with A [m x k] and
// B [k x n]. The PRG walks the output in tiles of (MB*MS) x (NB*MS); for each
// tile it loops over k in steps of KB*MS: the sender loads the A and B blocks,
// the PU multiplies and accumulates in its C windows (acc_clear on the first
// step), and after the last step the receiver writes the tile out. Only the
// output column tiles n_first, n_first+n_step, ... are done, so that two or
// four PRGs can split one GEMM (the hardware reuse of the FFN stage and the
// serial mode of the MHA stage).
//
// The three steps run one after the other inside a PRG. The paper notes that
// overlapping send, compute and receive is faster (1.41x); this design does
// not double-buffer the kernel windows, which is its main simplification.
// m must be a multiple of MS, k of KB*MS and n of MS; partial tiles at the M
// and N edges are handled by the sender and receiver.
//
// Interface: start with job (taken when idle); busy until the last row of C
// is written; pu_active is high while the PU kernels compute. Ports A and B read, port C writes (see mm_sender/mm_receiver).
module mm_prg
  import cat_pkg::*;
#(
  parameter int MS = 64,
  parameter int MB = 4,
  parameter int KB = 4,
  parameter int NB = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  mm_job_t         job,
  output logic            busy,
  output logic            pu_active,
  output logic            a_req_valid,
  output logic [31:0]     a_req_addr,
  output logic [15:0]     a_req_row,
  output logic [15:0]     a_req_cvec,
  input  logic            a_req_ready,
  input  logic            a_rsp_valid,
  input  logic [MS*8-1:0] a_rsp_data,
  output logic            b_req_valid,
  output logic [31:0]     b_req_addr,
  output logic [15:0]     b_req_row,
  output logic [15:0]     b_req_cvec,
  input  logic            b_req_ready,
  input  logic            b_rsp_valid,
  input  logic [MS*8-1:0] b_rsp_data,
  output logic            c_req_valid,
  output logic [31:0]     c_req_addr,
  output logic [MS*8-1:0] c_req_data,
  input  logic            c_req_ready
);
  localparam int RW = (MS > 1) ? $clog2(MS) : 1;

  typedef enum logic [2:0] {P_IDLE, P_SEND, P_WSEND, P_COMP, P_WCOMP, P_RECV, P_WRECV} st_e;
  st_e st;

  mm_job_t     jq;
  logic [15:0] mt, nt, kt, mtiles, ntiles, ktiles;
  logic [7:0]  mbv, nbv;

  logic snd_start, snd_busy, pu_start, pu_busy, rcv_start, rcv_busy;

  // PU wiring
  logic            pa_we, pb_we;
  logic [7:0]      pa_blk, pb_blk, pc_blk;
  logic [RW-1:0]   pa_row, pb_row, pc_row;
  logic [MS*8-1:0] pa_data, pb_data;
  logic [MS*32-1:0] pc_data;

  always_comb begin
    logic [15:0] mv, nv;
    mv  = 16'(jq.m / 16'(MS)) - 16'(mt * 16'(MB));
    nv  = 16'(jq.n / 16'(MS)) - 16'(nt * 16'(NB));
    mbv = (mv > 16'(MB)) ? 8'(MB) : mv[7:0];
    nbv = (nv > 16'(NB)) ? 8'(NB) : nv[7:0];
  end

  assign snd_start = (st == P_SEND);
  assign pu_start  = (st == P_COMP);
  assign rcv_start = (st == P_RECV);
  assign busy      = (st != P_IDLE);
  assign pu_active = pu_busy;

  mm_sender #(.MS(MS), .MB(MB), .KB(KB), .NB(NB)) u_snd (
    .clk, .rst_n, .start(snd_start), .a_desc(jq.a), .b_desc(jq.b),
    .mt, .nt, .kt, .mb_valid(mbv), .nb_valid(nbv), .busy(snd_busy),
    .a_req_valid, .a_req_addr, .a_req_row, .a_req_cvec, .a_req_ready, .a_rsp_valid, .a_rsp_data,
    .b_req_valid, .b_req_addr, .b_req_row, .b_req_cvec, .b_req_ready, .b_rsp_valid, .b_rsp_data,
    .pu_a_we(pa_we), .pu_a_blk(pa_blk), .pu_a_row(pa_row), .pu_a_data(pa_data),
    .pu_b_we(pb_we), .pu_b_blk(pb_blk), .pu_b_row(pb_row), .pu_b_data(pb_data)
  );

  aie_mm_pu #(.MS(MS), .MB(MB), .KB(KB), .NB(NB)) u_pu (
    .clk, .rst_n,
    .a_we(pa_we), .a_blk(pa_blk), .a_row(pa_row), .a_data(pa_data),
    .b_we(pb_we), .b_blk(pb_blk), .b_row(pb_row), .b_data(pb_data),
    .start(pu_start), .acc_clear(kt == 0), .busy(pu_busy),
    .c_blk(pc_blk), .c_row(pc_row), .c_data(pc_data)
  );

  mm_receiver #(.MS(MS), .MB(MB), .NB(NB)) u_rcv (
    .clk, .rst_n, .start(rcv_start), .c_desc(jq.c), .mt, .nt,
    .mb_valid(mbv), .nb_valid(nbv), .shift(jq.shift), .post(jq.post), .busy(rcv_busy),
    .pu_c_blk(pc_blk), .pu_c_row(pc_row), .pu_c_data(pc_data),
    .req_valid(c_req_valid), .req_addr(c_req_addr), .req_data(c_req_data), .req_ready(c_req_ready)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= P_IDLE; jq <= '0;
      mt <= '0; nt <= '0; kt <= '0; mtiles <= '0; ntiles <= '0; ktiles <= '0;
    end else begin
      case (st)
        P_IDLE: if (start) begin
          jq     <= job;
          mtiles <= 16'((job.m + 16'(MB * MS - 1)) / 16'(MB * MS));
          ntiles <= 16'((job.n + 16'(NB * MS - 1)) / 16'(NB * MS));
          ktiles <= 16'(job.k / 16'(KB * MS));
          mt <= '0; kt <= '0; nt <= 16'(job.n_first);
          if (16'(job.n_first) < 16'((job.n + 16'(NB * MS - 1)) / 16'(NB * MS)) && job.m != 0 && job.k != 0)
            st <= P_SEND;
        end
        P_SEND:  st <= P_WSEND;
        P_WSEND: if (!snd_busy) st <= P_COMP;
        P_COMP:  st <= P_WCOMP;
        P_WCOMP: if (!pu_busy) begin
          if (kt + 1 < ktiles) begin
            kt <= kt + 1'b1;
            st <= P_SEND;
          end else st <= P_RECV;
        end
        P_RECV:  st <= P_WRECV;
        P_WRECV: if (!rcv_busy) begin
          kt <= '0;
          if (mt + 1 < mtiles) begin
            mt <= mt + 1'b1;
            st <= P_SEND;
          end else begin
            mt <= '0;
            if (nt + 16'(jq.n_step) < ntiles && jq.n_step != 0) begin
              nt <= nt + 16'(jq.n_step);
              st <= P_SEND;
            end else st <= P_IDLE;
          end
        end
        default: st <= P_IDLE;
      endcase
    end
  end
endmodule
