// tile_transpose: the Transpose unit of an attention block (Fig. 3 of the
// paper), serving K^T to the Q*K^T PRG while K stays row-major in DRAM.
//
// The PRG's sender asks for row r, column-vec c of K^T, i.e. elements
// K[c*MS + j][r] for j = 0..MS-1. The unit keeps one MS x MS tile of K (rows
// c*MS.., column-vec r/MS); on a miss it reads the MS rows of that tile from
// memory, then answers every request that falls into it from the tile, one
// per cycle, with the transposed column. The paper names the transpose; the
// tile cache is this design's choice. flush drops the cached tile (new head).
//
// Upstream: vec read port (request carries row/cvec; req_addr is ignored);
// answered one cycle after it is taken. Downstream: vec read port to memory.
module tile_transpose
  import cat_pkg::*;
#(
  parameter int MS = 64
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            flush,
  input  mat_desc_t       k_desc,
  input  logic            req_valid,
  input  logic [15:0]     req_row,
  input  logic [15:0]     req_cvec,
  output logic            req_ready,
  output logic            rsp_valid,
  output logic [MS*8-1:0] rsp_data,
  output logic            m_valid,
  output logic [31:0]     m_addr,
  input  logic            m_ready,
  input  logic            m_rvalid,
  input  logic [MS*8-1:0] m_rdata
);
  localparam int RW = (MS > 1) ? $clog2(MS) : 1;

  logic [MS*8-1:0] tile [MS];
  logic            tag_v;
  logic [15:0]     tag_c, tag_k;
  logic            loading;
  logic [RW:0]     n_req, n_rsp;
  logic [15:0]     ld_c, ld_k;
  logic            hit;

  assign hit       = tag_v && tag_c == req_cvec && tag_k == 16'(req_row / 16'(MS));
  assign req_ready = hit && !loading && !flush;
  assign m_valid   = loading && n_req != (RW+1)'(MS);
  assign m_addr    = k_desc.base + 32'(16'(ld_c * 16'(MS)) + 16'(n_req)) * 32'(k_desc.ld) + 32'(ld_k);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tag_v <= 1'b0; tag_c <= '0; tag_k <= '0;
      loading <= 1'b0; n_req <= '0; n_rsp <= '0; ld_c <= '0; ld_k <= '0;
      rsp_valid <= 1'b0; rsp_data <= '0;
    end else begin
      rsp_valid <= req_valid && req_ready;
      if (req_valid && req_ready)
        for (int j = 0; j < MS; j++)
          rsp_data[j*8 +: 8] <= tile[j][(req_row % 16'(MS))*8 +: 8];
      if (flush) tag_v <= 1'b0;
      if (!loading && req_valid && !hit && !flush) begin
        loading <= 1'b1;
        tag_v   <= 1'b0;
        ld_c    <= req_cvec;
        ld_k    <= 16'(req_row / 16'(MS));
        n_req   <= '0;
        n_rsp   <= '0;
      end
      if (loading) begin
        if (m_valid && m_ready) n_req <= n_req + 1'b1;
        if (m_rvalid) begin
          tile[n_rsp[RW-1:0]] <= m_rdata;
          n_rsp <= n_rsp + 1'b1;
          if (n_rsp == (RW+1)'(MS - 1)) begin
            loading <= 1'b0;
            tag_v   <= 1'b1;
            tag_c   <= ld_c;
            tag_k   <= ld_k;
          end
        end
      end
    end
  end
endmodule
