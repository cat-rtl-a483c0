// cat_pkg: types, constants and arithmetic shared by the CAT encoder/decoder
// processing unit (EDPU).
//
// Data are int8. A "vec" is one row segment of MMSZ int8 elements, the unit in
// which every memory, buffer and the DRAM port move data; vec addresses count
// vecs, not bytes. A matrix in memory is described by a base vec address and a
// leading dimension (vecs per row). Matrix products are C = A * B with A [M x K]
// and B [K x N] both stored row-major, which is why K has to go through a
// transpose unit before Q*K^T (as in the attention block of the paper).
//
// Requantisation from the int32 accumulators to int8 (arithmetic right shift
// with round-half-up, then saturation), the fixed-point GELU and the fixed
// point format of activations (Q4: value = int8 / 16) are this design's own
// choices; the paper states only that the models are quantised to Int8.
package cat_pkg;

  // Post-operation applied by a receiver on its way out of the PU.
  typedef enum logic [0:0] {POST_NONE = 1'b0, POST_GELU = 1'b1} post_op_e;

  // Stage parallel mode (Sec. IV-C): mode (1) fully pipelined, mode (2)
  // serial linear blocks with parallel attention blocks.
  typedef enum logic [0:0] {PM_PIPELINE = 1'b0, PM_HYBRID = 1'b1} par_mode_e;

  // Matrix in memory: base vec address and vecs per row.
  typedef struct packed {
    logic [31:0] base;
    logic [15:0] ld;
  } mat_desc_t;

  // One GEMM job for a PRG. Sizes in elements (multiples of MMSZ). The output
  // column tiles handled are n_first, n_first+n_step, ... (tile = NB*MMSZ
  // columns of the PRG's PU), so that several PRGs can share one GEMM.
  typedef struct packed {
    mat_desc_t   a;
    mat_desc_t   b;
    mat_desc_t   c;
    logic [15:0] m;
    logic [15:0] k;
    logic [15:0] n;
    logic [7:0]  n_first;
    logic [7:0]  n_step;
    logic [4:0]  shift;
    post_op_e    post;
  } mm_job_t;

  // Attention job for one head in an ATB.
  typedef struct packed {
    mat_desc_t   q;       // Q_h: L x dh (base already offset to the head)
    mat_desc_t   k;       // K_h: L x dh
    mat_desc_t   v;       // V_h: L x dh
    mat_desc_t   o;       // O_h: L x dh, column slice of the merged output
    logic [15:0] l;       // sequence length
    logic [15:0] dh;      // head dimension
    logic [4:0]  s_shift; // requant shift of the scores Q K^T
    logic [4:0]  o_shift; // requant shift of P V
  } atb_job_t;

  // Residual add + layer norm job: y = LN(a + r), rows x cols.
  typedef struct packed {
    mat_desc_t   a;
    mat_desc_t   r;
    mat_desc_t   y;
    logic [15:0] rows;
    logic [15:0] cols;
  } ln_job_t;

  // Layer configuration written by the host before start.
  typedef struct packed {
    logic [31:0] x_base;   // layer input, batch_size x L x E
    logic [31:0] wq_base;  // E x E
    logic [31:0] wk_base;
    logic [31:0] wv_base;
    logic [31:0] wo_base;
    logic [31:0] w1_base;  // E x Dff
    logic [31:0] w2_base;  // Dff x E
    logic [31:0] q_base;   // scratch, L x E each
    logic [31:0] k_base;
    logic [31:0] v_base;
    logic [31:0] o_base;
    logic [31:0] p_base;   // projection output, L x E
    logic [31:0] h_base;   // FFN hidden, 2 x L x Dff (ping-pong)
    logic [31:0] f_base;   // FFN output, L x E
    logic [31:0] tmp_base; // MHA stage result, batch_size x L x E
    logic [31:0] res_base; // layer result,     batch_size x L x E
    logic [15:0] l;
    logic [15:0] e;
    logic [15:0] heads;
    logic [15:0] dff;
    logic [7:0]  batch;
    par_mode_e   pm_mha;
    par_mode_e   pm_ffn;
    logic [4:0]  qkv_shift;
    logic [4:0]  s_shift;
    logic [4:0]  o_shift;
    logic [4:0]  proj_shift;
    logic [4:0]  ffn1_shift;
    logic [4:0]  ffn2_shift;
  } edpu_cfg_t;

  // int32 -> int8: arithmetic shift right with round-half-up, saturate.
  function automatic logic signed [7:0] requant(input logic signed [31:0] acc,
                                                input logic [4:0] sh);
    logic signed [32:0] r;
    r = (sh == 0) ? 33'(acc) : ((33'(acc) + (33'sd1 <<< (sh - 1))) >>> sh);
    if (r > 127) return 8'sd127;
    else if (r < -128) return -8'sd128;
    else return r[7:0];
  endfunction

  // GELU on a Q4 int8 (value = x/16), integer form of the i-GELU
  // approximation: erf(u) ~ sign(u) * (a*(min(|u|,-b)+b)^2 + 1),
  // a = -0.2888, b = -1.769; GELU(x) = x/2 * (1 + erf(x/sqrt 2)).
  function automatic logic signed [7:0] gelu_q4(input logic signed [7:0] x);
    logic [7:0]         ax;
    logic [15:0]        u;     // |x|/sqrt2, Q4
    logic signed [15:0] d;     // min(u,28) - 28, Q4
    logic signed [31:0] lq;    // a*d^2 + 1, Q16
    logic signed [31:0] erfq;  // Q16
    logic signed [47:0] prod;
    logic signed [47:0] r;
    ax   = x[7] ? 8'(-x) : 8'(x);
    u    = (16'(ax) * 16'd181) >> 8;
    d    = (u > 16'd28) ? 16'sd0 : 16'(signed'(u) - 16'sd28);
    lq   = 32'sd65536 - 32'sd74 * 32'(d) * 32'(d);
    erfq = x[7] ? -lq : ((x == 0) ? 32'sd0 : lq);
    prod = 48'(x) * 48'(32'sd65536 + erfq);
    r    = (prod + 48'sd65536) >>> 17;
    if (r > 127) return 8'sd127;
    else if (r < -128) return -8'sd128;
    else return r[7:0];
  endfunction

endpackage
