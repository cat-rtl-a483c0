// tb_gelu_unit: all 256 int8 inputs against the scalar reference, plus the
// shape of GELU: identity for large positive inputs, zero for large negative
// ones, zero at zero, and close to x*Phi(x) (within 2 LSB) everywhere.
module tb_gelu_unit;
  import cat_ref_pkg::*;
  localparam int LANES = 4;
  logic [LANES*8-1:0] x, y;
  int checks = 0, failures = 0;
  function automatic real absr(real v); return (v < 0.0) ? -v : v; endfunction
  gelu_unit #(.LANES(LANES)) dut (.*);
  initial begin
    for (int v = -128; v < 128; v += LANES) begin
      for (int j = 0; j < LANES; j++) x[j*8 +: 8] = 8'(v + j);
      #1;
      for (int j = 0; j < LANES; j++) begin
        int got, xr;
        real r, phi;
        xr = v + j;
        got = int'(signed'(y[j*8 +: 8]));
        checks++;
        if (got != gelu(xr)) begin failures++; $display("gelu(%0d) = %0d, expected %0d", xr, got, gelu(xr)); end
        r = real'(xr) / 16.0;
        phi = 0.5 * (1.0 + ((r >= 0) ? 1.0 : -1.0) * (1.0 - 1.0 / ((1.0 + 0.278393*absr(r/1.41421356) + 0.230389*(r/1.41421356)**2 + 0.000972*absr(r/1.41421356)**3 + 0.078108*(r/1.41421356)**4)**4)));
        checks++;
        if (absr(real'(got) - r * phi * 16.0) > 2.0) begin
          failures++; $display("gelu(%0d) = %0d, too far from %f", xr, got, r * phi * 16.0);
        end
      end
    end
    checks += 3;
    if (gelu(100) != 100 || gelu(-100) != 0 || gelu(0) != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
