// sched_ref_pkg: transaction-level reference of the dynamic scheduler for
// the testbenches. It mirrors the request slots (lowest free slot first),
// applies layer results (sparsity coefficient, next layer, time of last
// run; removal after a final layer), and predicts each dispatch decision:
// after a layer result every score is recomputed at time t and the lowest
// one wins (lowest slot on ties); when the NPU was idle the stored scores
// decide. All arithmetic comes from dysta_ref_pkg (real numbers rounded per
// operation), not from the RTL.
package sched_ref_pkg;
  import fp16_ref_pkg::*;
  import dysta_ref_pkg::*;

  class sched_ref;
    int depth;
    bit          valid [];
    int          tag [], model [], layer [];
    logic [15:0] score [], ddl [], exe [], rni [], coef [];
    logic [15:0] lat [16][64], sp [16][64], shp [16][64];
    int          cur = -1;
    int          prev = -1;
    bit          pending_update = 0;
    logic [15:0] tnow = 0;

    function new(int d);
      depth = d;
      valid = new[d]; tag = new[d]; model = new[d]; layer = new[d];
      score = new[d]; ddl = new[d]; exe = new[d]; rni = new[d]; coef = new[d];
      foreach (valid[i]) valid[i] = 0;
    endfunction

    function int count();
      int n = 0;
      foreach (valid[i]) if (valid[i]) n++;
      return n;
    endfunction

    function int push(int t_tag, int m, logic [15:0] s, logic [15:0] d,
                      logic [15:0] r, logic [15:0] t);
      for (int i = 0; i < depth; i++) if (!valid[i]) begin
        valid[i] = 1; tag[i] = t_tag; model[i] = m; layer[i] = 0; score[i] = s;
        ddl[i] = d; exe[i] = t; rni[i] = r; coef[i] = 16'h3C00;
        return i;
      end
      return -1;
    endfunction

    // returns the tag of a completed request, or -1
    function int result(logic [15:0] zeros, logic [15:0] t, bit last);
      int done;
      done = -1;
      if (cur < 0) return -2;
      if (last) begin
        done = tag[cur];
        valid[cur] = 0;
        cur = -1;
        prev = -1;
      end else begin
        coef[cur] = ref_coef(zeros, shp[model[cur]][layer[cur]], sp[model[cur]][layer[cur]]);
        layer[cur]++;
        exe[cur] = t;
      end
      tnow = t;
      pending_update = (count() > 0);
      return done;
    endfunction

    // predicted slot of the next dispatch, or -1; sets preempt
    function int decide(logic [15:0] beta, output bit preempt);
      int best;
      best = -1;
      for (int i = 0; i < depth; i++) if (valid[i]) begin
        if (pending_update)
          score[i] = ref_score(tnow, ddl[i], exe[i], rni[i], beta,
                               lat[model[i]][layer[i]], coef[i]);
        if (best < 0 || fp16_to_real(score[i]) < fp16_to_real(score[best])) best = i;
      end
      pending_update = 0;
      preempt = (prev >= 0) && (best >= 0) && (prev != best);
      if (best >= 0) begin
        cur = best;
        prev = best;
      end
      return best;
    endfunction
  endclass
endpackage
