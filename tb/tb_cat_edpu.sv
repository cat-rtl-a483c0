// tb_cat_edpu: end-to-end test of the EDPU at reduced size: MMSZ = 4, four
// attention blocks, L = 16, E = 64, 16 heads of 4, Dff = 128, two sequences.
// The layer runs once with both stages in the pipelined mode and once in the
// hybrid mode; every output byte is compared with the reference model, and
// each mechanism is required to have occurred (see edpu_env).
module tb_cat_edpu;
  import cat_pkg::*;
  localparam int MS = 4, P = 4;
  logic clk, rst_n, start, busy, dram_valid, dram_we, dram_ready, dram_rvalid, ln_active, ffn_stage;
  edpu_cfg_t cfg;
  logic [31:0] dram_addr, mha_cycles, ffn_cycles;
  logic [MS*8-1:0] dram_wdata, dram_rdata;
  logic [47:0] kernel_cycles;
  logic [3:0] lb_active;
  logic [P-1:0] atb_active;

  cat_edpu #(.MS(MS), .P_ATB(P), .LMAX(16), .EMAX(64)) u_dut (.*);
  edpu_env #(.MS(MS), .P_ATB(P), .L(16), .E(64), .HEADS(16), .DFF(128), .BATCH(2), .MODES(2),
             .MAXCYC(2000000), .DEPTH(12288)) u_env (.*);
endmodule
