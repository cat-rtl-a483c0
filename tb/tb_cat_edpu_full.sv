// tb_cat_edpu_full: the EDPU at its default parameters (MS = 64, four
// attention blocks, 352 kernels) running one BERT-Base encoder layer:
// sequence length 256, embedding 768, 12 heads of 64, FFN width 3072, one
// batch, pipelined mode in both stages. edpu_env loads random inputs and
// weights, compares all 256 x 768 output bytes with the scalar reference and
// reports the cycle counts and the average number of busy kernels.
module tb_cat_edpu_full;
  import cat_pkg::*;
  localparam int MS = 64, P_ATB = 4;
  logic            clk, rst_n, start, busy;
  edpu_cfg_t       cfg;
  logic            dram_valid, dram_we, dram_ready, dram_rvalid;
  logic [31:0]     dram_addr;
  logic [MS*8-1:0] dram_wdata, dram_rdata;
  logic [31:0]     mha_cycles, ffn_cycles;
  logic [47:0]     kernel_cycles;
  logic [3:0]      lb_active;
  logic [P_ATB-1:0] atb_active;
  logic            ln_active, ffn_stage;

  cat_edpu dut (.*);

  edpu_env #(.MS(MS), .P_ATB(P_ATB), .L(256), .E(768), .HEADS(12), .DFF(3072), .BATCH(1),
             .MODES(1), .MAXCYC(3000000), .DEPTH(163840), .WMAG(4)) env (.*);
endmodule
