// mm_sender: the PL-side Sender of a PRG (Fig. 2 and Fig. 3 of the paper).
//
// For one PU iteration (output tile mt,nt and reduction step kt) it fetches
// the A blocks and then the B blocks the PU needs, one MS-wide row per read,
// and writes each row into the kernel windows of the AIE MM PU. The paper
// names the Sender and gives it one per PU so that every PU is fed in parallel;
// how it fetches is this design's choice.
//
// A rows come from port A, B rows from port B (two read ports so that a PRG
// can read A from an on-chip buffer and B from DRAM). Each port is a
// request/response pair: a request is taken when req_valid && req_ready; read
// data come back in request order on rsp_valid/rsp_data, any number of cycles
// later. Besides the vec address, the request carries the element row and
// column-vec index of the row being read, which a transposing source uses.
// Blocks outside mb_valid/nb_valid (a partial tile at the matrix edge) are not
// loaded; their kernels compute on stale data and the receiver drops them.
// busy rises on start and falls once the last row is in the PU.
module mm_sender
  import cat_pkg::*;
#(
  parameter int MS = 64,
  parameter int MB = 4,
  parameter int KB = 4,
  parameter int NB = 4,
  parameter int FD = 8,   // outstanding reads per port
  localparam int RW = (MS > 1) ? $clog2(MS) : 1   // row index width
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  mat_desc_t       a_desc,
  input  mat_desc_t       b_desc,
  input  logic [15:0]     mt,
  input  logic [15:0]     nt,
  input  logic [15:0]     kt,
  input  logic [7:0]      mb_valid,
  input  logic [7:0]      nb_valid,
  output logic            busy,
  // read port A
  output logic            a_req_valid,
  output logic [31:0]     a_req_addr,
  output logic [15:0]     a_req_row,
  output logic [15:0]     a_req_cvec,
  input  logic            a_req_ready,
  input  logic            a_rsp_valid,
  input  logic [MS*8-1:0] a_rsp_data,
  // read port B
  output logic            b_req_valid,
  output logic [31:0]     b_req_addr,
  output logic [15:0]     b_req_row,
  output logic [15:0]     b_req_cvec,
  input  logic            b_req_ready,
  input  logic            b_rsp_valid,
  input  logic [MS*8-1:0] b_rsp_data,
  // PU window writes
  output logic            pu_a_we,
  output logic [7:0]      pu_a_blk,
  output logic [RW-1:0]   pu_a_row,
  output logic [MS*8-1:0] pu_a_data,
  output logic            pu_b_we,
  output logic [7:0]      pu_b_blk,
  output logic [RW-1:0]   pu_b_row,
  output logic [MS*8-1:0] pu_b_data
);
  localparam int FW = $clog2(FD);

  typedef enum logic [1:0] {S_IDLE, S_A, S_B} st_e;
  st_e st;

  mat_desc_t   ad, bd;
  logic [15:0] mt_q, nt_q, kt_q;
  logic [7:0]  mbv, nbv;

  logic [7:0]    blk;       // request block
  logic [RW-1:0] row;       // request row
  logic          issued_all;

  // tag FIFO: destination of every outstanding read (shared, phases serial)
  logic [7:0]    f_blk [FD];
  logic [RW-1:0] f_row [FD];
  logic [FW:0]   f_wp, f_rp;
  logic          f_full, f_empty;
  assign f_full  = (f_wp - f_rp) == (FW+1)'(FD);
  assign f_empty = f_wp == f_rp;

  // block coordinates of the current request
  logic [7:0] a_mb, a_kb, b_kb, b_nb;
  assign a_mb = 8'(blk / 8'(KB));
  assign a_kb = 8'(blk % 8'(KB));
  assign b_kb = 8'(blk / 8'(NB));
  assign b_nb = 8'(blk % 8'(NB));

  localparam int NBLK = (MB * KB > KB * NB) ? MB * KB : KB * NB;

  // next block index (in the current phase) that is inside the valid area
  function automatic logic [8:0] next_blk(input logic is_b, input logic [8:0] from,
                                          input logic [7:0] mv, input logic [7:0] nv);
    for (int x = 0; x <= NBLK; x++) begin
      logic [8:0] c;
      c = from + 9'(x);
      if (!is_b && c >= 9'(MB * KB)) return 9'(MB * KB);
      if (is_b && c >= 9'(KB * NB))  return 9'(KB * NB);
      if (!is_b && 8'(c[7:0] / 8'(KB)) < mv) return c;
      if (is_b && 8'(c[7:0] % 8'(NB)) < nv)  return c;
    end
    return 9'h100;
  endfunction

  logic [15:0] a_r, b_r;
  assign a_r = 16'(mt_q * 16'(MB * MS) + 16'(a_mb) * 16'(MS) + 16'(row));
  assign b_r = 16'(kt_q * 16'(KB * MS) + 16'(b_kb) * 16'(MS) + 16'(row));

  assign a_req_valid = (st == S_A) && !issued_all && !f_full;
  assign a_req_row   = a_r;
  assign a_req_cvec  = 16'(kt_q * 16'(KB) + 16'(a_kb));
  assign a_req_addr  = ad.base + 32'(a_r) * 32'(ad.ld) + 32'(a_req_cvec);
  assign b_req_valid = (st == S_B) && !issued_all && !f_full;
  assign b_req_row   = b_r;
  assign b_req_cvec  = 16'(nt_q * 16'(NB) + 16'(b_nb));
  assign b_req_addr  = bd.base + 32'(b_r) * 32'(bd.ld) + 32'(b_req_cvec);

  logic take, rsp;
  assign take = (a_req_valid && a_req_ready) || (b_req_valid && b_req_ready);
  assign rsp  = (st == S_A) ? a_rsp_valid : ((st == S_B) ? b_rsp_valid : 1'b0);

  assign pu_a_we   = (st == S_A) && a_rsp_valid;
  assign pu_a_blk  = f_blk[f_rp[FW-1:0]];
  assign pu_a_row  = f_row[f_rp[FW-1:0]];
  assign pu_a_data = a_rsp_data;
  assign pu_b_we   = (st == S_B) && b_rsp_valid;
  assign pu_b_blk  = f_blk[f_rp[FW-1:0]];
  assign pu_b_row  = f_row[f_rp[FW-1:0]];
  assign pu_b_data = b_rsp_data;

  assign busy = (st != S_IDLE);

  // next valid block after the current one, first valid A block of a new
  // job and first valid B block; 9'h100 / >= count means none left
  logic [8:0] nb9, fa9, fb9;
  assign nb9 = next_blk(st == S_B, 9'(blk) + 9'd1, mbv, nbv);
  assign fa9 = next_blk(1'b0, 9'd0, mb_valid, nb_valid);
  assign fb9 = next_blk(1'b1, 9'd0, mbv, nbv);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      ad <= '0; bd <= '0;
      mt_q <= '0; nt_q <= '0; kt_q <= '0; mbv <= '0; nbv <= '0;
      blk <= '0; row <= '0; issued_all <= 1'b0;
      f_wp <= '0; f_rp <= '0;
    end else begin
      if (take) begin
        f_blk[f_wp[FW-1:0]] <= blk;
        f_row[f_wp[FW-1:0]] <= row;
        f_wp <= f_wp + 1'b1;
        if (row == RW'(MS - 1)) begin
          row <= '0;
          if ((st == S_A && nb9 >= 9'(MB * KB)) || (st == S_B && nb9 >= 9'(KB * NB)))
            issued_all <= 1'b1;
          else
            blk <= nb9[7:0];
        end else begin
          row <= row + 1'b1;
        end
      end
      if (rsp) f_rp <= f_rp + 1'b1;
      case (st)
        S_IDLE: if (start) begin
          ad <= a_desc; bd <= b_desc;
          mt_q <= mt; nt_q <= nt; kt_q <= kt;
          mbv <= mb_valid; nbv <= nb_valid;
          row <= '0; issued_all <= 1'b0;
          blk <= fa9[7:0];
          st <= S_A;
        end
        S_A: if (issued_all && f_empty) begin
          blk <= fb9[7:0];
          row <= '0;
          issued_all <= 1'b0;
          st <= S_B;
        end
        S_B: if (issued_all && f_empty) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
