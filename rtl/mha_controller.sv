// mha_controller: the MHA Controller of the EDPU (Fig. 2 of the paper),
// scheduling the Multi-Head Attention stage of Algorithm 1 for every batch:
// Q, K, V linear blocks, the attention blocks, the Proj linear block and
// Layernorm & Add (x + Proj(O) -> Tmp).
//
// Two parallel modes (Sec. IV-C), chosen by cfg.pm_mha:
//  PM_PIPELINE, mode (1): LB0, LB1, LB2 are the Q, K, V blocks and LB3 the
//    Proj block, each with its own PU. The QKV output is cut into slices of
//    P_ATB heads; in step s the QKV blocks compute slice s while the P_ATB
//    ATBs run the heads of slice s-1, so the linear blocks never wait for
//    the attention blocks (the paper's reason for separating the QKV linear
//    layers). Proj then runs on LB3, then Layernorm & Add.
//  PM_HYBRID, mode (2): Q, K and V are computed one after the other, each on
//    all four LBs (output column tiles dealt round-robin); then the head
//    groups run on the ATBs in parallel, group after group; then Proj on all
//    four LBs; then Layernorm & Add.
// Which mode to use is decided off-line (Eq. 5 of the paper); the slicing by
// P_ATB heads (Eq. 7) and the step-wise lock-step pipeline are this design's
// reading of the paper's description.
//
// Interface: start (with cfg stable) while idle, busy until the stage ends.
// Per unit a start pulse and a job; the units raise busy on the next edge.
// Requires E = heads * dh, P_ATB * dh a multiple of NB*MS of the Large PU.
module mha_controller
  import cat_pkg::*;
#(
  parameter int MS    = 64,
  parameter int NBL   = 4,   // NB of the Large PU (column tile = NBL*MS)
  parameter int P_ATB = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  edpu_cfg_t cfg,
  output logic      busy,
  output logic      lb_start [4],
  output mm_job_t   lb_job   [4],
  input  logic      lb_busy  [4],
  output logic      atb_start[P_ATB],
  output atb_job_t  atb_job  [P_ATB],
  input  logic      atb_busy [P_ATB],
  output logic      ln_start,
  output ln_job_t   ln_job,
  input  logic      ln_busy
);
  typedef enum logic [2:0] {PH_STEP, PH_Q, PH_K, PH_V, PH_GRP, PH_PROJ, PH_LN} ph_e;
  typedef enum logic [1:0] {C_IDLE, C_ISSUE, C_WAIT} cst_e;

  cst_e        cs;
  ph_e         ph;
  logic [15:0] s;      // pipeline step or head group
  logic [7:0]  b;      // batch
  logic [15:0] dh, ev, groups, spt;

  assign dh     = 16'(cfg.e / cfg.heads);
  assign ev     = 16'(cfg.e / 16'(MS));
  assign groups = 16'((cfg.heads + 16'(P_ATB - 1)) / 16'(P_ATB));
  assign spt    = 16'((16'(P_ATB) * dh) / 16'(NBL * MS));
  assign busy   = (cs != C_IDLE);

  logic [31:0] x_b, tmp_b;
  assign x_b   = cfg.x_base   + 32'(b) * 32'(cfg.l) * 32'(ev);
  assign tmp_b = cfg.tmp_base + 32'(b) * 32'(ev) * 32'(cfg.l);

  function automatic mm_job_t lin(input logic [31:0] a, input logic [31:0] w, input logic [31:0] c,
                                  input logic [15:0] n, input logic [7:0] nf, input logic [7:0] ns,
                                  input logic [4:0] sh, input logic [15:0] l, input logic [15:0] e);
    mm_job_t j;
    j.a = '{base: a, ld: 16'(e / 16'(MS))};
    j.b = '{base: w, ld: 16'(e / 16'(MS))};
    j.c = '{base: c, ld: 16'(e / 16'(MS))};
    j.m = l; j.k = e; j.n = n;
    j.n_first = nf; j.n_step = ns; j.shift = sh; j.post = POST_NONE;
    return j;
  endfunction

  function automatic atb_job_t head_job(input logic [15:0] h, input edpu_cfg_t c,
                                        input logic [15:0] d, input logic [15:0] ldv);
    atb_job_t j;
    logic [31:0] off;
    off = 32'(h) * 32'(d / 16'(MS));
    j.q = '{base: c.q_base + off, ld: ldv};
    j.k = '{base: c.k_base + off, ld: ldv};
    j.v = '{base: c.v_base + off, ld: ldv};
    j.o = '{base: c.o_base + off, ld: ldv};
    j.l = c.l; j.dh = d; j.s_shift = c.s_shift; j.o_shift = c.o_shift;
    return j;
  endfunction

  // jobs and starts of the current step
  always_comb begin
    logic [15:0] nend, h;
    logic [31:0] a, w, c;
    logic [4:0]  sh;
    h = '0; a = '0; w = '0; c = '0; sh = '0;
    for (int i = 0; i < 4; i++) begin
      lb_start[i] = 1'b0;
      lb_job[i]   = '0;
    end
    for (int i = 0; i < P_ATB; i++) begin
      atb_start[i] = 1'b0;
      atb_job[i]   = '0;
    end
    ln_start = 1'b0;
    ln_job   = '{a: '{base: cfg.p_base, ld: ev}, r: '{base: x_b, ld: ev},
                 y: '{base: tmp_b, ld: ev}, rows: cfg.l, cols: cfg.e};
    nend = 16'((s + 16'd1) * 16'(P_ATB) * dh);
    if (nend > cfg.e) nend = cfg.e;
    case (ph)
      PH_STEP: begin
        // QKV slice s, ATB group s-1
        lb_job[0] = lin(x_b, cfg.wq_base, cfg.q_base, nend, 8'(s * spt), 8'd1, cfg.qkv_shift, cfg.l, cfg.e);
        lb_job[1] = lin(x_b, cfg.wk_base, cfg.k_base, nend, 8'(s * spt), 8'd1, cfg.qkv_shift, cfg.l, cfg.e);
        lb_job[2] = lin(x_b, cfg.wv_base, cfg.v_base, nend, 8'(s * spt), 8'd1, cfg.qkv_shift, cfg.l, cfg.e);
        for (int i = 0; i < 3; i++) lb_start[i] = (cs == C_ISSUE) && (s < groups);
        for (int i = 0; i < P_ATB; i++) begin
          h = 16'((s - 16'd1) * 16'(P_ATB) + 16'(i));
          atb_job[i]   = head_job(h, cfg, dh, ev);
          atb_start[i] = (cs == C_ISSUE) && (s != 0) && (h < cfg.heads);
        end
      end
      PH_Q, PH_K, PH_V, PH_PROJ: begin
        a  = (ph == PH_PROJ) ? cfg.o_base : x_b;
        w  = (ph == PH_Q) ? cfg.wq_base : (ph == PH_K) ? cfg.wk_base :
             (ph == PH_V) ? cfg.wv_base : cfg.wo_base;
        c  = (ph == PH_Q) ? cfg.q_base : (ph == PH_K) ? cfg.k_base :
             (ph == PH_V) ? cfg.v_base : cfg.p_base;
        sh = (ph == PH_PROJ) ? cfg.proj_shift : cfg.qkv_shift;
        for (int i = 0; i < 4; i++) begin
          if (cfg.pm_mha == PM_HYBRID) begin
            lb_job[i]   = lin(a, w, c, cfg.e, 8'(i), 8'd4, sh, cfg.l, cfg.e);
            lb_start[i] = (cs == C_ISSUE);
          end else if (i == 3) begin
            lb_job[i]   = lin(a, w, c, cfg.e, 8'd0, 8'd1, sh, cfg.l, cfg.e);
            lb_start[i] = (cs == C_ISSUE);
          end
        end
      end
      PH_GRP: begin
        for (int i = 0; i < P_ATB; i++) begin
          h = 16'(s * 16'(P_ATB) + 16'(i));
          atb_job[i]   = head_job(h, cfg, dh, ev);
          atb_start[i] = (cs == C_ISSUE) && (h < cfg.heads);
        end
      end
      PH_LN: ln_start = (cs == C_ISSUE);
      default: ;
    endcase
  end

  logic any_busy;
  always_comb begin
    any_busy = ln_busy;
    for (int i = 0; i < 4; i++) any_busy |= lb_busy[i];
    for (int i = 0; i < P_ATB; i++) any_busy |= atb_busy[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cs <= C_IDLE; ph <= PH_STEP; s <= '0; b <= '0;
    end else begin
      case (cs)
        C_IDLE: if (start) begin
          b  <= '0; s <= '0;
          ph <= (cfg.pm_mha == PM_HYBRID) ? PH_Q : PH_STEP;
          cs <= (cfg.batch != 0) ? C_ISSUE : C_IDLE;
        end
        C_ISSUE: cs <= C_WAIT;
        C_WAIT: if (!any_busy) begin
          cs <= C_ISSUE;
          case (ph)
            PH_STEP: if (s < groups) s <= s + 1'b1; else ph <= PH_PROJ;
            PH_Q:    ph <= PH_K;
            PH_K:    ph <= PH_V;
            PH_V:    begin ph <= PH_GRP; s <= '0; end
            PH_GRP:  if (s + 1 < groups) s <= s + 1'b1; else ph <= PH_PROJ;
            PH_PROJ: ph <= PH_LN;
            PH_LN: begin
              s <= '0;
              ph <= (cfg.pm_mha == PM_HYBRID) ? PH_Q : PH_STEP;
              if (b + 1 < cfg.batch) b <= b + 1'b1;
              else cs <= C_IDLE;
            end
            default: cs <= C_IDLE;
          endcase
        end
        default: cs <= C_IDLE;
      endcase
    end
  end
endmodule
