// vec_ram: single-port on-chip buffer of DEPTH vecs (MS int8 each) with the
// vec memory-port protocol used throughout the EDPU.
//
// Used as the Attn Buffer of each attention block (Fig. 3 of the paper), which
// holds the L x L score matrix between Q*K^T, the softmax and P*V. The paper
// names the buffer; its organisation is this design's choice. A request is
// always accepted (req_ready = 1); a read returns its data one cycle later on
// rsp_valid/rsp_data; a write takes effect at the clock edge. Addresses wrap
// modulo DEPTH.
module vec_ram #(
  parameter int MS    = 64,
  parameter int DEPTH = 1024
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            req_valid,
  input  logic            req_we,
  input  logic [31:0]     req_addr,
  input  logic [MS*8-1:0] req_wdata,
  output logic            req_ready,
  output logic            rsp_valid,
  output logic [MS*8-1:0] rsp_data
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [MS*8-1:0] mem [DEPTH];
  logic [AW-1:0]   a;
  assign a = AW'(req_addr % 32'(DEPTH));
  assign req_ready = 1'b1;

  always_ff @(posedge clk) begin
    if (req_valid && req_we) mem[a] <= req_wdata;
    if (req_valid && !req_we) rsp_data <= mem[a];
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rsp_valid <= 1'b0;
    else rsp_valid <= req_valid && !req_we;
endmodule
