// detrap_ref_pkg -- reference model of the trigger behaviour, used by the
// testbenches. Written independently of the RTL: chains are found by walking
// back from each chain end, comparisons use plain arithmetic on ranges.
package detrap_ref_pkg;
  import detrap_pkg::*;

  typedef struct {
    logic [NTRIG-1:0] pretrig;
    logic             xcpt;
    logic             debug;
  } ref_res_t;

  // comparison without the negation bit
  function automatic logic ref_cmp_base(logic [2:0] m, logic [XLEN-1:0] t, logic [XLEN-1:0] a);
    int k, off;
    logic [XLEN-1:0] base;
    case (m)
      3'd0: return a == t;
      3'd2: return a >= t;
      3'd3: return a < t;
      3'd1: begin
        k = 0;
        while (k < XLEN && t[k]) k++;
        // range of 2^(k+1) bytes starting at t with its low k+1 bits cleared
        if (k + 1 >= XLEN) return 1'b1;
        base = (t >> (k + 1)) << (k + 1);
        return (a >= base) && ((a - base) < (XLEN'(1) << (k + 1)));
      end
      3'd4, 3'd5: begin
        off = (m == 3'd5) ? XLEN / 2 : 0;
        for (int b = 0; b < XLEN / 2; b++) begin
          // a masked bit must equal the value bit; an unmasked value bit must be 0
          if (t[XLEN/2 + b] && (a[off + b] != t[b])) return 1'b0;
          if (!t[XLEN/2 + b] && t[b]) return 1'b0;
        end
        return 1'b1;
      end
      default: return 1'b0;
    endcase
  endfunction

  function automatic logic ref_cmp(logic [3:0] m, logic [XLEN-1:0] t, logic [XLEN-1:0] a);
    case (m)
      4'd0, 4'd1, 4'd2, 4'd3, 4'd4, 4'd5: return ref_cmp_base(m[2:0], t, a);
      4'd8, 4'd9, 4'd12, 4'd13:           return !ref_cmp_base(m[2:0], t, a);
      default:                            return 1'b0;
    endcase
  endfunction

  function automatic logic ref_en(trig_t tr, logic [1:0] priv, logic dm);
    if (dm) return 1'b0;
    if (priv == 2'd3) return tr.ctl.m;
    if (priv == 2'd1) return tr.ctl.s;
    if (priv == 2'd0) return tr.ctl.u;
    return 1'b0;
  endfunction

  // Result of chains ending at each trigger, given per-trigger hits.
  // need_mem: some member must have matched through memory.
  function automatic ref_res_t ref_chains(trig_t [NTRIG-1:0] trig,
                                          logic [NTRIG-1:0] hit,
                                          logic [NTRIG-1:0] mhit, logic need_mem);
    ref_res_t r;
    r.pretrig = hit;
    r.xcpt = 0;
    r.debug = 0;
    for (int e = 0; e < NTRIG; e++) begin
      int s;
      logic all, anym;
      if (trig[e].ctl.chain) continue;
      s = e;
      while (s > 0 && trig[s-1].ctl.chain) s--;
      all = 1; anym = 0;
      for (int j = s; j <= e; j++) begin
        all &= hit[j];
        anym |= mhit[j];
      end
      if (all && (anym || !need_mem)) begin
        if (trig[e].ctl.action == 4'd1) r.debug = 1;
        else r.xcpt = 1;
      end
    end
    return r;
  endfunction

  function automatic ref_res_t ref_pc(trig_t [NTRIG-1:0] trig, logic [1:0] priv, logic dm,
                                      logic valid, logic [XLEN-1:0] pc);
    logic [NTRIG-1:0] h;
    for (int i = 0; i < NTRIG; i++)
      h[i] = valid && trig[i].ctl.execute && ref_en(trig[i], priv, dm)
             && ref_cmp(trig[i].ctl.match, trig[i].tdata2, pc);
    return ref_chains(trig, h, '0, 1'b0);
  endfunction

  function automatic ref_res_t ref_mem(trig_t [NTRIG-1:0] trig, logic [1:0] priv, logic dm,
                                       logic valid, logic ld, logic st, logic [XLEN-1:0] a,
                                       logic [NTRIG-1:0] pretrig);
    logic [NTRIG-1:0] h, mh;
    for (int i = 0; i < NTRIG; i++) begin
      mh[i] = valid && ref_en(trig[i], priv, dm)
              && ((trig[i].ctl.load && ld) || (trig[i].ctl.store && st))
              && ref_cmp(trig[i].ctl.match, trig[i].tdata2, a);
      h[i] = mh[i] || (valid && pretrig[i]);
    end
    return ref_chains(trig, h, mh, 1'b1);
  endfunction

  // A legal random trigger configuration: chains of at most two.
  function automatic trig_t [NTRIG-1:0] rand_trigs(logic [XLEN-1:0] pc, logic [XLEN-1:0] a);
    trig_t [NTRIG-1:0] t;
    for (int i = 0; i < NTRIG; i++) begin
      t[i] = '0;
      t[i].ctl.ttype   = 4'd2;
      t[i].ctl.match   = ($urandom % 4 == 0) ? 4'(8 + 4 * ($urandom % 2) + $urandom % 2)
                                             : 4'($urandom % 6);
      t[i].ctl.m       = ($urandom % 4) != 0;
      t[i].ctl.u       = $urandom % 2;
      t[i].ctl.execute = $urandom % 2;
      t[i].ctl.store   = $urandom % 2;
      t[i].ctl.load    = $urandom % 2;
      t[i].ctl.action  = ($urandom % 4 == 0) ? 4'd1 : 4'd0;
      t[i].ctl.chain   = (i < NTRIG - 1) && !(i > 0 && t[i-1].ctl.chain) && ($urandom % 2);
      // compare values near the addresses so that matches are frequent
      case ($urandom % 3)
        0: t[i].tdata2 = pc + 32'($urandom % 8) - 32'd4;
        1: t[i].tdata2 = a + 32'($urandom % 8) - 32'd4;
        default: t[i].tdata2 = $urandom;
      endcase
    end
    return t;
  endfunction
endpackage
