// aie_mm_core: one AIE (Versal vector-processor tile) kernel of an AIE MM PU, as synthesizable logic.
//
// It holds its own input windows, an A tile and a B tile of MS x MS int8 each,
// and an MS x MS int32 result window C. On start it computes
// C = (acc_clear ? 0 : C) + A * B. The single-core load is square,
// MMSZ^3 (Sec. IV-B of the paper, Eq. 3: MMSZ a power of two with
// MMSZ^2 * bits <= window/4; MMSZ = 64 in the paper's design case).
//
// How: row by row, an outer-product MAC of MS lanes. For output row i the
// core walks k = 0..MS-1 and adds A[i][k] * B[k][*] into an MS-lane int32
// accumulator, then writes the row back to C. One row takes MS cycles, the
// whole tile MS*MS cycles; busy is high from the cycle after start until the
// last row is written. The lane count (MS MACs per cycle) is this design's
// choice; the real AIE core is a VLIW vector processor programmed in C++.
//
// Interface: a_we/a_row/a_data and b_we/b_row/b_data write one row of A or B
// (the sender's side). c_row selects a C row, read combinationally on c_data
// (the receiver's side, through the cascade sum of the PU). Windows must not
// be written while busy.
module aie_mm_core #(
  parameter int MS = 64,
  localparam int RW = (MS > 1) ? $clog2(MS) : 1   // row index width
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                a_we,
  input  logic [RW-1:0]       a_row,
  input  logic [MS*8-1:0]     a_data,
  input  logic                b_we,
  input  logic [RW-1:0]       b_row,
  input  logic [MS*8-1:0]     b_data,
  input  logic                start,
  input  logic                acc_clear,
  output logic                busy,
  input  logic [RW-1:0]       c_row,
  output logic [MS*32-1:0]    c_data
);

  logic [MS*8-1:0]  amem [MS];
  logic [MS*8-1:0]  bmem [MS];
  logic [MS*32-1:0] cmem [MS];

  logic [RW-1:0] i_q, k_q;
  logic          clr_q;
  logic signed [31:0] acc_q [MS];
  logic signed [31:0] acc_d [MS];
  logic signed [7:0]  a_el;

  assign c_data = cmem[c_row];
  assign a_el   = signed'(amem[i_q][k_q*8 +: 8]);

  always_comb begin
    for (int j = 0; j < MS; j++) begin
      logic signed [31:0] base;
      if (k_q == '0) base = clr_q ? 32'sd0 : signed'(cmem[i_q][j*32 +: 32]);
      else           base = acc_q[j];
      acc_d[j] = base + 32'(a_el) * 32'(signed'(bmem[k_q][j*8 +: 8]));
    end
  end

  always_ff @(posedge clk) begin
    if (a_we) amem[a_row] <= a_data;
    if (b_we) bmem[b_row] <= b_data;
    if (busy && k_q == RW'(MS - 1))
      for (int j = 0; j < MS; j++) cmem[i_q][j*32 +: 32] <= acc_d[j];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      i_q   <= '0;
      k_q   <= '0;
      clr_q <= 1'b0;
      for (int j = 0; j < MS; j++) acc_q[j] <= '0;
    end else if (!busy) begin
      if (start) begin
        busy  <= 1'b1;
        i_q   <= '0;
        k_q   <= '0;
        clr_q <= acc_clear;
      end
    end else begin
      for (int j = 0; j < MS; j++) acc_q[j] <= acc_d[j];
      if (k_q == RW'(MS - 1)) begin
        k_q <= '0;
        if (i_q == RW'(MS - 1)) busy <= 1'b0;
        else i_q <= i_q + 1'b1;
      end else begin
        k_q <= k_q + 1'b1;
      end
    end
  end
endmodule
