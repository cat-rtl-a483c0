// tb_vec_ram: the on-chip vec buffer at MS = 4, DEPTH = 64. Random writes and
// reads in random order against a shadow copy; checks every read and its
// one-cycle latency, and that the port never stalls.
module tb_vec_ram;
  localparam int MS = 4, VW = MS * 8, DEPTH = 64;
  logic clk = 0, rst_n = 0, req_valid = 0, req_we = 0, req_ready, rsp_valid;
  logic [31:0] req_addr = '0;
  logic [VW-1:0] req_wdata = '0, rsp_data;
  logic [VW-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  vec_ram #(.MS(MS), .DEPTH(DEPTH)) dut (.*);
  initial begin repeat (20000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    logic [VW-1:0] expd;
    bit pend;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); req_valid = 1; req_we = 1; req_addr = i; req_wdata = VW'($urandom); shadow[i] = req_wdata;
    end
    pend = 0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      if (pend) begin
        checks++;
        if (!rsp_valid || rsp_data != expd) begin failures++; if (failures < 5) $display("read %0d wrong", n); end
      end else begin
        checks++;
        if (rsp_valid) begin failures++; $display("response without a read"); end
      end
      checks++;
      if (!req_ready) failures++;
      req_valid = ($urandom_range(3) != 0); req_we = ($urandom_range(2) == 0);
      req_addr = $urandom_range(DEPTH - 1); req_wdata = VW'($urandom);
      pend = req_valid && !req_we;
      if (pend) expd = shadow[req_addr];
      if (req_valid && req_we) shadow[req_addr] = req_wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
