// mem_arbiter: round-robin merge of N vec-wide memory ports onto one.
//
// The paper moves all large data through DRAM ("the whole system uses DRAM as
// the data exchange center") and connects blocks by internal streams (Fig. 2
// "Stream", Fig. 3 "Internal HLS stream connection"). In this design every
// data mover of the EDPU reaches DRAM through a tree of these arbiters; the
// arbiter is this design's own choice of interconnect.
//
// Port protocol (upstream and downstream alike): a request (valid, we, addr,
// wdata) is taken in the cycle valid && ready. Reads are answered in request
// order by rsp_valid/rsp_data, any number of cycles later; writes get no
// answer. The grant is combinational (one request per cycle passes), the
// priority rotates past the last winner. The owner of every read in flight is
// kept in a FIFO of depth FD; when it is full no read is granted. Response
// routing therefore needs the downstream side to answer in order.
// The assertion at the end samples rst_n synchronously (disable iff) while
// the flops reset asynchronously; the lint note on rst_n being used both
// ways comes from that check only and leaves the logic unaffected.
module mem_arbiter #(
  parameter int N  = 4,
  parameter int VW = 512,
  parameter int FD = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          m_valid [N],
  input  logic          m_we    [N],
  input  logic [31:0]   m_addr  [N],
  input  logic [VW-1:0] m_wdata [N],
  output logic          m_ready [N],
  output logic          m_rvalid[N],
  output logic [VW-1:0] m_rdata [N],
  output logic          s_valid,
  output logic          s_we,
  output logic [31:0]   s_addr,
  output logic [VW-1:0] s_wdata,
  input  logic          s_ready,
  input  logic          s_rvalid,
  input  logic [VW-1:0] s_rdata
);
  localparam int IW = (N > 1) ? $clog2(N) : 1;
  localparam int FW = $clog2(FD);

  logic [IW-1:0] ptr, sel;
  logic          any;
  logic [IW-1:0] f_id [FD];
  logic [FW:0]   f_wp, f_rp;
  logic          f_full;
  assign f_full = (f_wp - f_rp) == (FW+1)'(FD);

  // master x places after the round-robin pointer
  function automatic logic [IW-1:0] rr(input logic [IW-1:0] p, input int x);
    return IW'((int'(p) + x) % N);
  endfunction

  always_comb begin
    any = 1'b0;
    sel = '0;
    for (int x = 0; x < N; x++)
      if (!any && m_valid[rr(ptr, x)] && !(f_full && !m_we[rr(ptr, x)])) begin
        any = 1'b1;
        sel = rr(ptr, x);
      end
  end

  assign s_valid = any;
  assign s_we    = m_we[sel];
  assign s_addr  = m_addr[sel];
  assign s_wdata = m_wdata[sel];

  always_comb
    for (int c = 0; c < N; c++) begin
      m_ready[c]  = any && (sel == IW'(c)) && s_ready;
      m_rvalid[c] = s_rvalid && (f_id[f_rp[FW-1:0]] == IW'(c));
      m_rdata[c]  = s_rdata;
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr  <= '0;
      f_wp <= '0;
      f_rp <= '0;
    end else begin
      if (any && s_ready) begin
        ptr <= IW'((int'(sel) + 1) % N);
        if (!s_we) begin
          f_id[f_wp[FW-1:0]] <= sel;
          f_wp <= f_wp + 1'b1;
        end
      end
      if (s_rvalid) f_rp <= f_rp + 1'b1;
    end
  end

  // a response must belong to an outstanding read
  a_rsp_owned: assert property (@(posedge clk) disable iff (!rst_n) s_rvalid |-> (f_wp != f_rp));
endmodule
