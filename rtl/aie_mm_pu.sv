// aie_mm_pu: AIE matrix-multiplication processing unit (AIE MM PU).
//
// A group of MB x KB x NB kernels (aie_mm_core) that computes, in one
// iteration, a (MB*MS) x (KB*MS) x (NB*MS) block product. Kernel (mb,kb,nb)
// multiplies A block (mb,kb) by B block (kb,nb); the KB kernels that share an
// output block are summed along the cascade when the result is read. The three
// sizes of the paper (Sec. IV-B, Fig. 4) map to:
//   Large    MB=4 KB=4 NB=4  64 kernels, 4MMSZ x 4MMSZ x 4MMSZ
//   Standard MB=2 KB=4 NB=2  16 kernels, 2MMSZ x 4MMSZ x 2MMSZ
//   Small    MB=1 KB=1 NB=4   4 kernels,  MMSZ x  MMSZ x 4MMSZ
// The defaults are the Large PU. An A row written to block (mb,kb) is
// broadcast to all NB kernels of that block row, a B row of block (kb,nb) to
// all MB kernels of that column, as the packet-switched PLIO inputs of Fig. 4
// feed several kernels; the PLIO channels themselves are not modelled.
//
// Interface: a_we/a_blk(=mb*KB+kb)/a_row/a_data, b_we/b_blk(=kb*NB+nb)/
// b_row/b_data load the windows; start/acc_clear run all kernels at once
// (busy for MS*MS cycles); c_blk(=mb*NB+nb)/c_row read an output row, the
// cascade sum over kb, combinationally on c_data (MS int32 lanes).
module aie_mm_pu #(
  parameter int MS = 64,
  parameter int MB = 4,
  parameter int KB = 4,
  parameter int NB = 4,
  localparam int RW = (MS > 1) ? $clog2(MS) : 1   // row index width
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             a_we,
  input  logic [7:0]       a_blk,
  input  logic [RW-1:0]    a_row,
  input  logic [MS*8-1:0]  a_data,
  input  logic             b_we,
  input  logic [7:0]       b_blk,
  input  logic [RW-1:0]    b_row,
  input  logic [MS*8-1:0]  b_data,
  input  logic             start,
  input  logic             acc_clear,
  output logic             busy,
  input  logic [7:0]       c_blk,
  input  logic [RW-1:0]    c_row,
  output logic [MS*32-1:0] c_data
);
  localparam int NC = MB * KB * NB;

  logic [MS*32-1:0] cd [NC];
  logic [NC-1:0]    bz;

  for (genvar mb = 0; mb < MB; mb++) begin : g_m
    for (genvar kb = 0; kb < KB; kb++) begin : g_k
      for (genvar nb = 0; nb < NB; nb++) begin : g_n
        localparam int ID = (mb * KB + kb) * NB + nb;
        aie_mm_core #(.MS(MS)) u_core (
          .clk, .rst_n,
          .a_we     (a_we && a_blk == 8'(mb * KB + kb)),
          .a_row, .a_data,
          .b_we     (b_we && b_blk == 8'(kb * NB + nb)),
          .b_row, .b_data,
          .start, .acc_clear,
          .busy     (bz[ID]),
          .c_row,
          .c_data   (cd[ID])
        );
      end
    end
  end

  assign busy = |bz;

  // Cascade: sum the KB partial results of the selected output block.
  always_comb begin
    c_data = '0;
    for (int mb = 0; mb < MB; mb++)
      for (int nb = 0; nb < NB; nb++)
        if (c_blk == 8'(mb * NB + nb))
          for (int kb = 0; kb < KB; kb++)
            for (int j = 0; j < MS; j++)
              c_data[j*32 +: 32] = c_data[j*32 +: 32] + cd[(mb * KB + kb) * NB + nb][j*32 +: 32];
  end
endmodule
