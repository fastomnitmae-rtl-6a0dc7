// tmae_tb_pkg: algorithm-level reference model of FastOmniTMAE training.
//
// Written from the training procedure, not from the RTL: for each example and
// each clause it evaluates the clause (AND of included literals, state > 127),
// takes the local update decision
//   r = clip(w*o, -T, T), p = (T -/+ r)/2T, update if sampled and w >= 0,
// and applies Type Ia / Ib / II feedback literal by literal. The only thing it
// shares with the hardware is the order in which random numbers are drawn
// (xorshift32 streams, see tmae_pkg), so that results can be compared bit for
// bit: one draw of the per-engine stream per clause group decision, and one
// draw of the per-lane stream per beat of an update pass.
package tmae_tb_pkg;
  import tmae_pkg::*;

  typedef struct {
    int unsigned updates, skipped, ia, ib, ii, neg_blocked, eval_passes, update_passes;
    int unsigned sat_hi, sat_lo;
  } ref_cnt_t;

  // states: [clause*2F + literal], xs: [example*F + feature]
  function automatic void ref_train(
      input int unsigned F, NE, C, LANES, num_ex, epochs, T, s_inv, seed,
      ref byte unsigned states[], input int w[], input bit xs[], input bit ys[],
      output ref_cnt_t cnt);
    int unsigned lg[], fg[];
    int unsigned L, LW;
    L  = 2 * F;
    LW = L / LANES;
    lg = new[LANES/2];
    fg = new[NE];
    foreach (lg[i]) lg[i] = rng_seed(seed, i);
    foreach (fg[i]) fg[i] = rng_seed(seed, 64 + i);
    cnt = '{default: 0};
    for (int unsigned ep = 0; ep < epochs; ep++) begin
      for (int unsigned ex = 0; ex < num_ex; ex++) begin
        bit y;
        y = ys[ex];
        for (int unsigned g0 = 0; g0 < C; g0 += NE) begin
          int unsigned A;
          fb_e fb[];
          bit any;
          A  = (C - g0 < NE) ? C - g0 : NE;
          fb = new[NE];
          any = 0;
          cnt.eval_passes++;
          for (int unsigned e = 0; e < NE; e++) begin
            fb[e] = FB_NONE;
            if (e < A) begin
              int unsigned c;
              bit o;
              longint r, num, pick;
              c = g0 + e;
              o = 1;
              for (int unsigned l = 0; l < L; l++) begin
                bit lit;
                lit = (l < F) ? xs[ex*F + l] : !xs[ex*F + l - F];
                if (states[c*L + l] > 127 && !lit) o = 0;
              end
              r = o ? longint'(w[c]) : 0;
              if (r > longint'(T)) r = longint'(T);
              if (r < -longint'(T)) r = -longint'(T);
              num  = y ? (longint'(T) - r) : (longint'(T) + r);
              pick = (longint'(fg[e]) * (2 * longint'(T))) >>> 32;
              if (pick < num) begin
                if (w[c] < 0) cnt.neg_blocked++;
                else if (y) fb[e] = o ? FB_IA : FB_IB;
                else if (o) fb[e] = FB_II;
              end
              case (fb[e])
                FB_IA: cnt.ia++;
                FB_IB: cnt.ib++;
                FB_II: cnt.ii++;
                default: ;
              endcase
              if (fb[e] != FB_NONE) begin any = 1; cnt.updates++; end
            end
          end
          foreach (fg[i]) fg[i] = xorshift32(fg[i]);
          if (!any) begin
            cnt.skipped++;
            continue;
          end
          cnt.update_passes++;
          for (int unsigned wd = 0; wd < LW; wd++) begin
            for (int unsigned e = 0; e < A; e++) begin
              int unsigned c;
              c = g0 + e;
              for (int unsigned i = 0; i < LANES; i++) begin
                int unsigned l, st, rnd;
                bit lit, forget;
                l   = wd * LANES + i;
                lit = (l < F) ? xs[ex*F + l] : !xs[ex*F + l - F];
                st  = states[c*L + l];
                rnd = (lg[i/2] >> (16 * (i % 2))) & 16'hFFFF;
                forget = rnd < s_inv;
                case (fb[e])
                  FB_IA: if (lit) begin if (st < 255) st++; else cnt.sat_hi++; end
                         else if (forget) begin if (st > 0) st--; else cnt.sat_lo++; end
                  FB_IB: if (forget) begin if (st > 0) st--; else cnt.sat_lo++; end
                  FB_II: if (!lit && st <= 127) st++;
                  default: ;
                endcase
                states[c*L + l] = byte'(st);
              end
              foreach (lg[i]) lg[i] = xorshift32(lg[i]);
            end
          end
        end
      end
    end
  endfunction
endpackage
