// ffn_controller: the FFN Controller of the EDPU (Fig. 2 of the paper),
// scheduling the Feed Forward Network stage of Algorithm 1 for every batch:
// H = GELU(Tmp * W1) on the FFN1 linear block, F = H * W2 on the FFN2 linear
// block, then Layernorm & Add (Tmp + F -> Res).
//
// The stage reuses the four Large-PU linear blocks of the MHA stage (the
// "hardware resource reuse" of Fig. 3; Sec. V-B: two Large PUs per FFN
// linear block). Two parallel modes, chosen by cfg.pm_ffn:
//  PM_PIPELINE, mode (1): FFN1 runs on LB0+LB1 and FFN2 on LB2+LB3 (output
//    column tiles split even/odd). In step s FFN1 works on batch s while FFN2
//    works on batch s-1, then Layernorm & Add closes batch s-1. H is
//    double-buffered (two L x Dff regions, by batch parity).
//  PM_HYBRID, mode (2): per batch FFN1 on all four LBs, then FFN2 on all
//    four, then Layernorm & Add.
// The batch-level pipelining is this design's reading of "all PRGs are
// launched in parallel ... the whole stage forms a large pipeline".
//
// Interface as mha_controller: start while idle, busy until the stage ends.
module ffn_controller
  import cat_pkg::*;
#(
  parameter int MS = 64
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  edpu_cfg_t cfg,
  output logic      busy,
  output logic      lb_start [4],
  output mm_job_t   lb_job   [4],
  input  logic      lb_busy  [4],
  output logic      ln_start,
  output ln_job_t   ln_job,
  input  logic      ln_busy
);
  typedef enum logic [1:0] {PH_STEP, PH_F1, PH_F2, PH_LN} ph_e;
  typedef enum logic [1:0] {C_IDLE, C_ISSUE, C_WAIT} cst_e;

  cst_e       cs;
  ph_e        ph;
  logic [8:0] s;   // step (pipeline) or batch (hybrid)

  logic [15:0] ev, fv;
  assign ev   = 16'(cfg.e / 16'(MS));
  assign fv   = 16'(cfg.dff / 16'(MS));
  assign busy = (cs != C_IDLE);

  // per-batch addresses
  function automatic logic [31:0] act(input logic [31:0] base, input logic [8:0] bb,
                                      input logic [15:0] l, input logic [15:0] v);
    return base + 32'(bb) * 32'(l) * 32'(v);
  endfunction

  function automatic mm_job_t ffn1(input edpu_cfg_t c, input logic [8:0] bb, input logic [7:0] nf,
                                   input logic [7:0] ns, input logic [15:0] e_v, input logic [15:0] f_v);
    mm_job_t j;
    j.a = '{base: act(c.tmp_base, bb, c.l, e_v), ld: e_v};
    j.b = '{base: c.w1_base, ld: f_v};
    j.c = '{base: c.h_base + 32'(bb[0]) * 32'(c.l) * 32'(f_v), ld: f_v};
    j.m = c.l; j.k = c.e; j.n = c.dff;
    j.n_first = nf; j.n_step = ns; j.shift = c.ffn1_shift; j.post = POST_GELU;
    return j;
  endfunction

  function automatic mm_job_t ffn2(input edpu_cfg_t c, input logic [8:0] bb, input logic [7:0] nf,
                                   input logic [7:0] ns, input logic [15:0] e_v, input logic [15:0] f_v);
    mm_job_t j;
    j.a = '{base: c.h_base + 32'(bb[0]) * 32'(c.l) * 32'(f_v), ld: f_v};
    j.b = '{base: c.w2_base, ld: e_v};
    j.c = '{base: c.f_base, ld: e_v};
    j.m = c.l; j.k = c.dff; j.n = c.e;
    j.n_first = nf; j.n_step = ns; j.shift = c.ffn2_shift; j.post = POST_NONE;
    return j;
  endfunction

  logic [8:0] lnb;   // batch closed by Layernorm & Add
  assign lnb = (cfg.pm_ffn == PM_PIPELINE) ? s - 9'd1 : s;

  always_comb begin
    for (int i = 0; i < 4; i++) begin
      lb_start[i] = 1'b0;
      lb_job[i]   = '0;
    end
    ln_start = (ph == PH_LN) && (cs == C_ISSUE);
    ln_job   = '{a: '{base: cfg.f_base, ld: ev}, r: '{base: act(cfg.tmp_base, lnb, cfg.l, ev), ld: ev},
                 y: '{base: act(cfg.res_base, lnb, cfg.l, ev), ld: ev}, rows: cfg.l, cols: cfg.e};
    case (ph)
      PH_STEP: begin
        for (int i = 0; i < 2; i++) begin
          lb_job[i]     = ffn1(cfg, s, 8'(i), 8'd2, ev, fv);
          lb_start[i]   = (cs == C_ISSUE) && (s < 9'(cfg.batch));
          lb_job[i+2]   = ffn2(cfg, s - 9'd1, 8'(i), 8'd2, ev, fv);
          lb_start[i+2] = (cs == C_ISSUE) && (s != 0);
        end
      end
      PH_F1: for (int i = 0; i < 4; i++) begin
        lb_job[i]   = ffn1(cfg, s, 8'(i), 8'd4, ev, fv);
        lb_start[i] = (cs == C_ISSUE);
      end
      PH_F2: for (int i = 0; i < 4; i++) begin
        lb_job[i]   = ffn2(cfg, s, 8'(i), 8'd4, ev, fv);
        lb_start[i] = (cs == C_ISSUE);
      end
      default: ;
    endcase
  end

  logic any_busy;
  always_comb begin
    any_busy = ln_busy;
    for (int i = 0; i < 4; i++) any_busy |= lb_busy[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cs <= C_IDLE; ph <= PH_STEP; s <= '0;
    end else begin
      case (cs)
        C_IDLE: if (start) begin
          s  <= '0;
          ph <= (cfg.pm_ffn == PM_HYBRID) ? PH_F1 : PH_STEP;
          cs <= (cfg.batch != 0) ? C_ISSUE : C_IDLE;
        end
        C_ISSUE: cs <= C_WAIT;
        C_WAIT: if (!any_busy) begin
          cs <= C_ISSUE;
          case (ph)
            PH_STEP: if (s == 0) s <= 9'd1; else ph <= PH_LN;
            PH_F1:   ph <= PH_F2;
            PH_F2:   ph <= PH_LN;
            PH_LN: begin
              if (cfg.pm_ffn == PM_PIPELINE) begin
                ph <= PH_STEP;
                if (s < 9'(cfg.batch)) s <= s + 1'b1;
                else cs <= C_IDLE;
              end else begin
                ph <= PH_F1;
                if (s + 1 < 9'(cfg.batch)) s <= s + 1'b1;
                else cs <= C_IDLE;
              end
            end
            default: cs <= C_IDLE;
          endcase
        end
        default: cs <= C_IDLE;
      endcase
    end
  end
endmodule
