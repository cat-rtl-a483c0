// layernorm_add: the "Layernorm & Add" unit that closes each stage of the EDPU
// (Fig. 3 of the paper; Algorithm 1, Layernorm_Add.run after the Proj LB and
// after the FFN2 LB). It computes, row by row, y = LN(a + r): a is the stage's
// last linear layer output, r the residual (the stage input).
//
// Per row of n = cols elements (MS lanes per vec):
//   pass 1: read a and r vecs, z = a + r (int16), keep z in a row buffer,
//           accumulate S = sum z and Q = sum z^2;
//   then:   V = n*Q - S^2 (= n^2 * variance), sd = isqrt(V) (= n * std,
//           bit-serial, 32 cycles), inv = floor(2^32 / sd);
//   pass 2: y = sat8(((z*n - S) * 16 * inv + 2^31) >>> 32), i.e. the
//           normalised value in Q4, written out.
// The paper does not give the arithmetic; the integer form, the Q4 output and
// leaving out the learned scale and shift (gamma = 1, beta = 0) are this
// design's choices. One DRAM read is in flight at a time.
//
// Interface: start with job (cat_pkg::ln_job_t); busy until the last write.
// Memory port: vec port (valid/we/addr/wdata, ready; in-order rsp_valid).
module layernorm_add
  import cat_pkg::*;
#(
  parameter int MS   = 64,
  parameter int EMAX = 768    // longest row (Embed_dim)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  ln_job_t         job,
  output logic            busy,
  output logic            req_valid,
  output logic            req_we,
  output logic [31:0]     req_addr,
  output logic [MS*8-1:0] req_wdata,
  input  logic            req_ready,
  input  logic            rsp_valid,
  input  logic [MS*8-1:0] rsp_data
);
  localparam int NV = (EMAX + MS - 1) / MS;
  localparam int VA = (NV > 1) ? $clog2(NV) : 1;

  typedef enum logic [3:0] {L_IDLE, L_RDA, L_WA, L_RDR, L_WR_R, L_SQRT, L_DIV, L_OUT} st_e;
  st_e st;

  ln_job_t jq;
  logic [15:0] r, v, nv;
  logic [MS*16-1:0] zbuf [NV];
  logic [MS*8-1:0]  a_q;
  logic signed [31:0] s_sum;
  logic [63:0]  q_sum;
  logic [63:0]  var_q;
  logic [31:0]  sd;
  logic [5:0]   bit_i;
  logic [63:0]  inv;
  logic [MS*8-1:0] y_vec;

  assign busy      = (st != L_IDLE);
  assign req_valid = (st == L_RDA) || (st == L_RDR) || (st == L_OUT);
  assign req_we    = (st == L_OUT);
  assign req_addr  = (st == L_RDA) ? jq.a.base + 32'(r) * 32'(jq.a.ld) + 32'(v) :
                     (st == L_RDR) ? jq.r.base + 32'(r) * 32'(jq.r.ld) + 32'(v) :
                                     jq.y.base + 32'(r) * 32'(jq.y.ld) + 32'(v);
  assign req_wdata = y_vec;

  // output lanes of the current vec
  always_comb
    for (int j = 0; j < MS; j++) begin
      logic signed [63:0] num, pr;
      num = (64'(signed'(zbuf[VA'(v)][j*16 +: 16])) * 64'(jq.cols) - 64'(s_sum)) * 64'sd16;
      pr  = (num * signed'(inv) + 64'sh8000_0000) >>> 32;
      if (sd == 0) y_vec[j*8 +: 8] = 8'd0;
      else if (pr > 127) y_vec[j*8 +: 8] = 8'd127;
      else if (pr < -128) y_vec[j*8 +: 8] = 8'h80;
      else y_vec[j*8 +: 8] = pr[7:0];
    end

  // pass-1 sums with the vec on rsp_data, and the next square-root trial bit
  logic signed [31:0] s_nx;
  logic [63:0]        q_nx;
  logic [MS*16-1:0]   z_vec;
  logic [31:0]        sd_try;
  always_comb begin
    s_nx = s_sum;
    q_nx = q_sum;
    for (int j = 0; j < MS; j++) begin
      logic signed [15:0] z;
      z = 16'(signed'(a_q[j*8 +: 8])) + 16'(signed'(rsp_data[j*8 +: 8]));
      z_vec[j*16 +: 16] = z;
      s_nx = s_nx + 32'(z);
      q_nx = q_nx + 64'(32'(z) * 32'(z));
    end
  end
  assign sd_try = sd | (32'd1 << bit_i);

  // row buffer of z = a + r (no reset: every entry is written before it is read)
  always_ff @(posedge clk)
    if (st == L_WR_R && rsp_valid) zbuf[VA'(v)] <= z_vec;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= L_IDLE; jq <= '0; r <= '0; v <= '0; nv <= '0; a_q <= '0;
      s_sum <= '0; q_sum <= '0; var_q <= '0; sd <= '0; bit_i <= '0; inv <= '0;
    end else begin
      case (st)
        L_IDLE: if (start) begin
          jq <= job; r <= '0; v <= '0; nv <= 16'(job.cols / 16'(MS));
          s_sum <= '0; q_sum <= '0;
          st <= (job.rows != 0 && job.cols >= 16'(MS)) ? L_RDA : L_IDLE;
        end
        L_RDA:  if (req_ready) st <= L_WA;
        L_WA:   if (rsp_valid) begin a_q <= rsp_data; st <= L_RDR; end
        L_RDR:  if (req_ready) st <= L_WR_R;
        L_WR_R: if (rsp_valid) begin
          s_sum <= s_nx; q_sum <= q_nx;
          if (v + 1 < nv) begin v <= v + 1'b1; st <= L_RDA; end
          else begin
            v <= '0;
            var_q <= 64'(jq.cols) * q_nx - 64'(64'(s_nx) * 64'(s_nx));
            sd <= '0; bit_i <= 6'd31;
            st <= L_SQRT;
          end
        end
        L_SQRT: begin
          if (64'(sd_try) * 64'(sd_try) <= var_q) sd <= sd_try;
          if (bit_i == 0) st <= L_DIV;
          else bit_i <= bit_i - 1'b1;
        end
        L_DIV: begin
          inv <= (sd == 0) ? 64'd0 : (64'h1_0000_0000 / 64'(sd));
          st  <= L_OUT;
        end
        L_OUT: if (req_ready) begin
          if (v + 1 < nv) v <= v + 1'b1;
          else begin
            v <= '0; s_sum <= '0; q_sum <= '0;
            if (r + 1 < jq.rows) begin r <= r + 1'b1; st <= L_RDA; end
            else st <= L_IDLE;
          end
        end
        default: st <= L_IDLE;
      endcase
    end
  end
endmodule
