// unit_stub: behavioural stand-in for a unit driven by a controller (a
// linear block, an attention block or Layernorm & Add) in the controller
// testbenches. A start pulse makes busy rise on the next edge and stay high
// for a random MINC..MAXC cycles; the job itself is only recorded by the
// testbench. Simulation only.
module unit_stub #(
  parameter int MINC = 3,
  parameter int MAXC = 40
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic busy
);
  int cnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; cnt <= 0;
    end else if (start && !busy) begin
      busy <= 1'b1; cnt <= int'($urandom_range(MAXC - MINC)) + MINC;
    end else if (busy) begin
      if (cnt <= 1) busy <= 1'b0;
      cnt <= cnt - 1;
    end
  end
endmodule
