// mm_receiver: the PL-side Receiver of a PRG (Fig. 2 and Fig. 3 of the paper).
//
// After the last reduction step of an output tile it drains the PU: for every
// valid output block (mb,nb) and row it reads the cascade-summed int32 row,
// requantises it to int8 (cat_pkg::requant, shift per job), applies the
// optional post-operation and writes the vec to the destination. The GELU
// lanes sit here for the FFN1 linear block, where Fig. 3 places GELU right
// after the FFN1 Receiver. The requantisation is this design's choice.
//
// Write port: req_valid/req_addr/req_data, taken when req_ready; one row per
// cycle when the destination is ready. busy rises on start and falls after
// the last write is taken.
module mm_receiver
  import cat_pkg::*;
#(
  parameter int MS = 64,
  parameter int MB = 4,
  parameter int NB = 4,
  localparam int RW = (MS > 1) ? $clog2(MS) : 1   // row index width
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  mat_desc_t        c_desc,
  input  logic [15:0]      mt,
  input  logic [15:0]      nt,
  input  logic [7:0]       mb_valid,
  input  logic [7:0]       nb_valid,
  input  logic [4:0]       shift,
  input  post_op_e         post,
  output logic             busy,
  // PU result read
  output logic [7:0]       pu_c_blk,
  output logic [RW-1:0]    pu_c_row,
  input  logic [MS*32-1:0] pu_c_data,
  // write port
  output logic             req_valid,
  output logic [31:0]      req_addr,
  output logic [MS*8-1:0]  req_data,
  input  logic             req_ready
);

  mat_desc_t   cd;
  logic [15:0] mt_q, nt_q;
  logic [7:0]  mbv, nbv;
  logic [4:0]  sh;
  post_op_e    po;
  logic [7:0]  mb, nb;
  logic [RW-1:0] row;

  logic [MS*8-1:0] q8, g8;
  gelu_unit #(.LANES(MS)) u_gelu (.x(q8), .y(g8));

  always_comb
    for (int j = 0; j < MS; j++) q8[j*8 +: 8] = requant(signed'(pu_c_data[j*32 +: 32]), sh);

  logic [15:0] r_el, c_vec;
  assign r_el      = 16'(mt_q * 16'(MB * MS) + 16'(mb) * 16'(MS) + 16'(row));
  assign c_vec     = 16'(nt_q * 16'(NB) + 16'(nb));
  assign pu_c_blk  = 8'(mb * 8'(NB) + nb);
  assign pu_c_row  = row;
  assign req_valid = busy;
  assign req_addr  = cd.base + 32'(r_el) * 32'(cd.ld) + 32'(c_vec);
  assign req_data  = (po == POST_GELU) ? g8 : q8;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      cd <= '0; mt_q <= '0; nt_q <= '0; mbv <= '0; nbv <= '0; sh <= '0; po <= POST_NONE;
      mb <= '0; nb <= '0; row <= '0;
    end else if (!busy) begin
      if (start) begin
        cd <= c_desc; mt_q <= mt; nt_q <= nt; mbv <= mb_valid; nbv <= nb_valid;
        sh <= shift; po <= post;
        mb <= '0; nb <= '0; row <= '0;
        busy <= (mb_valid != 0) && (nb_valid != 0);
      end
    end else if (req_ready) begin
      if (row != RW'(MS - 1)) row <= row + 1'b1;
      else begin
        row <= '0;
        if (nb + 1 < nbv) nb <= nb + 1'b1;
        else begin
          nb <= '0;
          if (mb + 1 < mbv) mb <= mb + 1'b1;
          else busy <= 1'b0;
        end
      end
    end
  end
endmodule
