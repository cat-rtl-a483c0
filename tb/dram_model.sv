// dram_model: behavioural model of the off-chip DRAM behind the EDPU's vec
// port, for simulation only (not synthesizable: it is a stand-in for a DRAM
// device and its controller). DEPTH vecs of VW bits. A request is taken when
// req_valid && req_ready; req_ready drops at random in STALL_PCT percent of
// the cycles to model a busy memory. Reads are answered in order, LAT cycles
// after they are taken. The memory array `mem` is loaded and read by the
// testbench directly.
module dram_model #(
  parameter int VW        = 512,
  parameter int DEPTH     = 4096,
  parameter int LAT       = 4,
  parameter int STALL_PCT = 10
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req_valid,
  input  logic          req_we,
  input  logic [31:0]   req_addr,
  input  logic [VW-1:0] req_wdata,
  output logic          req_ready,
  output logic          rsp_valid,
  output logic [VW-1:0] rsp_data
);
  logic [VW-1:0] mem [DEPTH];
  logic          pv [LAT];
  logic [VW-1:0] pd [LAT];
  int unsigned   stalls;
  int unsigned   out_of_range;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_ready <= 1'b1;
      for (int i = 0; i < LAT; i++) begin pv[i] <= 1'b0; pd[i] <= '0; end
      stalls <= 0;
      out_of_range <= 0;
    end else begin
      req_ready <= ($urandom_range(99) >= STALL_PCT);
      if (req_valid && !req_ready) stalls <= stalls + 1;
      pv[0] <= req_valid && req_ready && !req_we;
      pd[0] <= (req_addr < DEPTH) ? mem[req_addr] : '0;
      for (int i = 1; i < LAT; i++) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
      if (req_valid && req_ready && req_addr >= DEPTH) out_of_range <= out_of_range + 1;
      if (req_valid && req_ready && req_we && req_addr < DEPTH) mem[req_addr] <= req_wdata;
    end
  end
  assign rsp_valid = pv[LAT-1];
  assign rsp_data  = pd[LAT-1];
endmodule
