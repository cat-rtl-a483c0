// softmax_unit: row softmax over the attention scores in an Attn Buffer
// (Fig. 3 of the paper: Attn Buffer -> SoftMax -> Sender). The paper names
// the operator and places it on the PL; the arithmetic below is this design's.
//
// Scores are int8 in Q4 (value = s/16). Each row of len elements is read
// three times, MS lanes per vec:
//   1. m = max_j s_j
//   2. e_j = 2^(-t_j), t_j = (m - s_j) * log2(e) in Q4 (x23/16), evaluated as
//      (65536 - frac*2048) >> int (a linear fit of 2^-frac), sum = sum_j e_j
//      then recip = floor(2^31 / sum) (the row max gives e = 65536, so
//      sum >= 65536 and recip <= 32768)
//   3. p_j = (e_j * recip * 127 + 2^30) >> 31 in 0..127 (Q7 probability),
//      written back in place.
// The buffer port is the vec port of vec_ram; one read is in flight at a
// time. Interface: start with base/ld/rows/len; busy until the last write.
module softmax_unit #(
  parameter int MS = 64
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [31:0]     base,
  input  logic [15:0]     ld,
  input  logic [15:0]     rows,
  input  logic [15:0]     len,
  output logic            busy,
  output logic            req_valid,
  output logic            req_we,
  output logic [31:0]     req_addr,
  output logic [MS*8-1:0] req_wdata,
  input  logic            req_ready,
  input  logic            rsp_valid,
  input  logic [MS*8-1:0] rsp_data
);
  typedef enum logic [2:0] {X_IDLE, X_RD, X_WAIT, X_DIV, X_WR} st_e;
  st_e st;
  logic [1:0]  pass;     // 0 max, 1 sum, 2 normalise
  logic [15:0] r, v, nv, rows_q, ld_q;
  logic [31:0] base_q;
  logic signed [7:0] mx;
  logic [31:0] sum, recip;
  logic [MS*8-1:0] pbuf;

  function automatic logic [16:0] exp2n(input logic signed [7:0] m, input logic signed [7:0] s);
    logic [8:0]  d;
    logic [12:0] t;
    logic [8:0]  q;
    logic [3:0]  f;
    d = 9'(10'(m) - 10'(s));
    t = 13'((14'(d) * 14'd23) >> 4);
    q = 9'(t >> 4);
    f = t[3:0];
    if (q >= 9'd17) return 17'd0;
    return 17'((18'd65536 - 18'(f) * 18'd2048) >> q);
  endfunction

  assign busy      = (st != X_IDLE);
  assign req_valid = (st == X_RD) || (st == X_WR);
  assign req_we    = (st == X_WR);
  assign req_addr  = base_q + 32'(r) * 32'(ld_q) + 32'(v);
  assign req_wdata = pbuf;

  // per-pass results of the vec on rsp_data
  logic signed [7:0] mx_nx;
  logic [31:0]       sum_nx;
  logic [MS*8-1:0]   p_nx;
  always_comb begin
    mx_nx  = mx;
    sum_nx = sum;
    for (int j = 0; j < MS; j++) begin
      logic [63:0] pr;
      if (signed'(rsp_data[j*8 +: 8]) > mx_nx) mx_nx = signed'(rsp_data[j*8 +: 8]);
      sum_nx = sum_nx + 32'(exp2n(mx, signed'(rsp_data[j*8 +: 8])));
      pr = 64'(exp2n(mx, signed'(rsp_data[j*8 +: 8]))) * 64'(recip) * 64'd127 + 64'h4000_0000;
      p_nx[j*8 +: 8] = 8'(pr >> 31);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= X_IDLE; pass <= '0; r <= '0; v <= '0; nv <= '0; rows_q <= '0; ld_q <= '0;
      base_q <= '0; mx <= '0; sum <= '0; recip <= '0; pbuf <= '0;
    end else begin
      case (st)
        X_IDLE: if (start) begin
          base_q <= base; ld_q <= ld; rows_q <= rows;
          nv <= 16'(len / 16'(MS));
          r <= '0; v <= '0; pass <= 2'd0; mx <= -8'sd128; sum <= '0;
          st <= (rows != 0 && len >= 16'(MS)) ? X_RD : X_IDLE;
        end
        X_RD: if (req_ready) st <= X_WAIT;
        X_WAIT: if (rsp_valid) begin
          if (pass == 2'd0) mx <= mx_nx;
          else if (pass == 2'd1) sum <= sum_nx;
          else pbuf <= p_nx;
          if (pass == 2'd2) st <= X_WR;
          else if (v + 1 < nv) begin
            v <= v + 1'b1;
            st <= X_RD;
          end else begin
            v <= '0;
            if (pass == 2'd0) begin pass <= 2'd1; st <= X_RD; end
            else st <= X_DIV;
          end
        end
        X_DIV: begin
          recip <= (sum == 0) ? 32'd0 : 32'(64'h8000_0000 / 64'(sum));
          pass  <= 2'd2;
          st    <= X_RD;
        end
        X_WR: if (req_ready) begin
          if (v + 1 < nv) begin
            v <= v + 1'b1;
            st <= X_RD;
          end else begin
            v <= '0;
            pass <= 2'd0; mx <= -8'sd128; sum <= '0;
            if (r + 1 < rows_q) begin
              r <= r + 1'b1;
              st <= X_RD;
            end else st <= X_IDLE;
          end
        end
        default: st <= X_IDLE;
      endcase
    end
  end
endmodule
