// fssc_tb_pkg: test-side models for the Fast-SSC decoder.
//
//  * build_pw_frozen: frozen set from the polarization-weight construction
//    (w(i) = sum over set bits b of i of 2^(b/4)); the K largest weights are
//    information bits.
//  * compile_prog: the offline instruction compiler. It walks the decoder tree
//    depth first and emits the Fast-SSC operations; with `merge` set it also
//    emits the merged special nodes (Rep-RepSPC, Rep-Rate1, Rate0-ML) and then
//    runs the peephole passes in the order of the merging guidelines:
//    G-F and F-G0, then F x2 (from the tail of a run), F-Rep, G0 x2 (from the
//    tail), and C/C0 x2/x3 (from the head). Merged operations are only formed
//    at stages <= log2(PE).
//  * ref_decode: bit-exact software Fast-SSC decoder that executes an unmerged
//    program on per-stage arrays (it has no packed words, banks or masks), with
//    its own saturating fixed-point arithmetic.
//  * encode: polar encoder x = u * G^{(x)n}.
package fssc_tb_pkg;
  import fssc_pkg::op_e, fssc_pkg::instr_t;
  import fssc_pkg::*;

  typedef instr_t prog_t [$];

  // ------------------------------------------------------------ construction
  function automatic void build_pw_frozen(input int n, input int k, output bit info [1024]);
    real w [1024];
    int  idx [1024];
    int  logn;
    logn = $clog2(n);
    for (int i = 0; i < n; i++) begin
      w[i] = 0.0;
      for (int b = 0; b < logn; b++) if (i[b]) w[i] += 2.0 ** (real'(b) / 4.0);
      idx[i] = i;
      info[i] = 0;
    end
    // selection sort of the k largest weights (ties: larger index first)
    for (int a = 0; a < k; a++) begin
      int best;
      best = a;
      for (int c = a + 1; c < n; c++)
        if (w[idx[c]] > w[idx[best]] || (w[idx[c]] == w[idx[best]] && idx[c] > idx[best])) best = c;
      begin int t; t = idx[a]; idx[a] = idx[best]; idx[best] = t; end
      info[idx[a]] = 1;
    end
  endfunction

  // ------------------------------------------------------------ node classes
  function automatic int icount(const ref bit info [1024], input int s, input int off);
    int c;
    c = 0;
    for (int i = 0; i < (1 << s); i++) c += int'(info[off + i]);
    return c;
  endfunction

  function automatic bit pat(const ref bit info [1024], input int s, input int off, input string p);
    for (int i = 0; i < (1 << s); i++)
      if (info[off + i] != (p[i] == "I")) return 0;
    return 1;
  endfunction

  function automatic bit is_r0(const ref bit info [1024], input int s, input int off);
    return icount(info, s, off) == 0;
  endfunction
  function automatic bit is_r1(const ref bit info [1024], input int s, input int off);
    return icount(info, s, off) == (1 << s);
  endfunction
  function automatic bit is_rep(const ref bit info [1024], input int s, input int off);
    return icount(info, s, off) == 1 && info[off + (1 << s) - 1];
  endfunction
  function automatic bit is_spc(const ref bit info [1024], input int s, input int off);
    return icount(info, s, off) == (1 << s) - 1 && !info[off];
  endfunction

  function automatic instr_t mk(input op_e op, input int s, input int dst);
    instr_t i;
    i.op = op;
    i.stage = 4'(s);
    i.dst = 1'(dst);
    return i;
  endfunction

  // ------------------------------------------------------------ compiler
  // returns 0 on success
  function automatic int compile_prog(const ref bit info [1024], input int n, input int pe,
                                      input bit merge, output prog_t prog);
    int logn, logpe, sp, err;
    int st_s [64], st_off [64], st_dst [64], st_ph [64];
    logn  = $clog2(n);
    logpe = $clog2(pe);
    prog  = {};
    err   = 0;
    sp = 0;
    st_s[0] = logn; st_off[0] = 0; st_dst[0] = 0; st_ph[0] = 0;
    while (sp >= 0) begin
      int s, off, dst, ph, h;
      s = st_s[sp]; off = st_off[sp]; dst = st_dst[sp]; ph = st_ph[sp];
      h = 1 << (s - 1);
      if (ph == 0) begin
        if (s <= logpe && merge && s == 4 && pat(info, s, off, "FFFFFFFIFFFIFIII")) begin
          prog.push_back(mk(OP_REPREPSPC, s, dst)); sp--; continue;
        end
        if (s <= logpe && merge && s == 3 && pat(info, s, off, "FFFIIIII")) begin
          prog.push_back(mk(OP_REPRATE1, s, dst)); sp--; continue;
        end
        if (s <= logpe && merge && s == 3 && pat(info, s, off, "FFFFFFII")) begin
          prog.push_back(mk(OP_RATE0ML, s, dst)); sp--; continue;
        end
        if (s == 3 && pat(info, s, off, "FFFIFIII")) begin
          prog.push_back(mk(OP_REPSPC, s, dst)); sp--; continue;
        end
        if (s == 2 && pat(info, s, off, "FFII")) begin
          prog.push_back(mk(OP_ML, s, dst)); sp--; continue;
        end
        if (s >= 2 && s <= logpe && is_rep(info, s, off)) begin
          prog.push_back(mk(OP_REP, s, dst)); sp--; continue;
        end
        if (s >= 2 && s <= logpe && is_spc(info, s, off)) begin
          prog.push_back(mk(OP_SPC, s, dst)); sp--; continue;
        end
        if (s < 3 || is_r0(info, s, off) || is_r1(info, s, off)) begin
          $display("compile: no operation for node stage %0d offset %0d", s, off);
          err++; sp--; continue;       // no operation for this node
        end
        if (is_r0(info, s - 1, off)) begin
          if (is_r1(info, s - 1, off + h)) begin
            prog.push_back(mk(OP_P01, s, dst)); sp--; continue;
          end
          if (is_spc(info, s - 1, off + h) && s <= logpe + 1) begin
            prog.push_back(mk(OP_P0SPC, s, dst)); sp--; continue;
          end
          prog.push_back(mk(OP_G0, s, 0));
          st_ph[sp] = 2;
          sp++; st_s[sp] = s - 1; st_off[sp] = off + h; st_dst[sp] = 1; st_ph[sp] = 0;
        end else begin
          prog.push_back(mk(OP_F, s, 0));
          st_ph[sp] = 1;
          sp++; st_s[sp] = s - 1; st_off[sp] = off; st_dst[sp] = 0; st_ph[sp] = 0;
        end
      end else if (ph == 1) begin
        if (is_r1(info, s - 1, off + h)) begin
          prog.push_back(mk(OP_PR1, s, dst)); sp--; continue;
        end
        if (is_spc(info, s - 1, off + h) && s <= logpe + 1) begin
          prog.push_back(mk(OP_PRSPC, s, dst)); sp--; continue;
        end
        prog.push_back(mk(OP_G, s, 0));
        st_ph[sp] = 3;
        sp++; st_s[sp] = s - 1; st_off[sp] = off + h; st_dst[sp] = 1; st_ph[sp] = 0;
      end else begin
        prog.push_back(mk(ph == 2 ? OP_C0 : OP_C, s, dst));
        sp--;
      end
    end

    if (merge) begin
      prog_t q;
      // G-F and F-G0
      q = {};
      for (int i = 0; i < prog.size(); i++) begin
        if (i + 1 < prog.size() && prog[i].op == OP_G && prog[i+1].op == OP_F &&
            prog[i].stage <= logpe && prog[i].stage >= 4 && prog[i+1].stage == prog[i].stage - 1) begin
          q.push_back(mk(OP_GF, prog[i].stage, 0)); i++;
        end else if (i + 1 < prog.size() && prog[i].op == OP_F && prog[i+1].op == OP_G0 &&
            prog[i].stage <= logpe + 1 && prog[i].stage >= 4 && prog[i+1].stage == prog[i].stage - 1) begin
          q.push_back(mk(OP_FG0, prog[i].stage, 0)); i++;
        end else q.push_back(prog[i]);
      end
      prog = q;
      // F x2 and G0 x2, from the tail of each run (G0 x2 and F-G0 also on a
      // one-word node, 2*PE inputs)
      for (int pass = 0; pass < 2; pass++) begin
        op_e one, two;
        one = pass == 0 ? OP_F : OP_G0;
        two = pass == 0 ? OP_F2 : OP_G02;
        q = {};
        for (int i = prog.size() - 1; i >= 0; i--) begin
          if (i >= 1 && prog[i].op == one && prog[i-1].op == one && prog[i-1].stage <= logpe + pass &&
              prog[i-1].stage >= 4 && prog[i].stage == prog[i-1].stage - 1) begin
            q.push_front(mk(two, prog[i-1].stage, 0)); i--;
          end else q.push_front(prog[i]);
        end
        prog = q;
        if (pass == 0) begin
          // F-Rep on the remaining F operations
          q = {};
          for (int i = 0; i < prog.size(); i++) begin
            if (i + 1 < prog.size() && prog[i].op == OP_F && prog[i+1].op == OP_REP &&
                prog[i].stage <= logpe && prog[i+1].stage == prog[i].stage - 1 &&
                prog[i+1].stage >= 3 && prog[i+1].stage <= 5) begin
              q.push_back(mk(OP_FREP, prog[i].stage, 0)); i++;
            end else q.push_back(prog[i]);
          end
          prog = q;
        end
      end
      // C x2/x3 and C0 x2/x3, from the head
      q = {};
      for (int i = 0; i < prog.size(); i++) begin
        int run;
        op_e one;
        one = prog[i].op;
        run = 1;
        if ((one == OP_C || one == OP_C0))
          while (run < 3 && i + run < prog.size() && prog[i+run].op == one &&
                 prog[i+run].stage == prog[i].stage + run && prog[i].stage + run <= logpe)
            run++;
        if (run == 1) q.push_back(prog[i]);
        else begin
          op_e m;
          if (one == OP_C) m = (run == 3) ? OP_C3 : OP_C2;
          else             m = (run == 3) ? OP_C03 : OP_C02;
          q.push_back(mk(m, prog[i].stage, prog[i+run-1].dst));
          i += run - 1;
        end
      end
      prog = q;
    end
    prog.push_back(mk(OP_END, 0, 0));
    return err;
  endfunction

  // clock cycles a program takes (END included)
  function automatic int prog_cycles(const ref prog_t prog, input int pe);
    int c;
    c = 0;
    foreach (prog[i]) c += (prog[i].stage > $clog2(pe)) ? (1 << (prog[i].stage - 1)) / pe : 1;
    return c;
  endfunction

  // ------------------------------------------------------------ encoder
  function automatic void encode(input int n, const ref bit u [1024], output bit x [1024]);
    for (int i = 0; i < n; i++) x[i] = u[i];
    for (int h = 1; h < n; h <<= 1)
      for (int i = 0; i < n; i++)
        if ((i & h) == 0) x[i] ^= x[i + h];
  endfunction

  // ------------------------------------------------------------ reference decoder
  function automatic int rsat(input int v);
    return v > 31 ? 31 : v < -31 ? -31 : v;
  endfunction
  function automatic int rf(input int a, input int b);
    int ma, mb, m;
    ma = a < 0 ? -a : a; if (ma > 31) ma = 31;
    mb = b < 0 ? -b : b; if (mb > 31) mb = 31;
    m = ma < mb ? ma : mb;
    return ((a < 0) != (b < 0)) ? -m : m;
  endfunction
  function automatic int rg(input int a, input int b, input bit beta);
    return rsat(beta ? b - a : b + a);
  endfunction

  // Decodes with an unmerged program; ch holds the channel LLRs (integers in
  // units of the fractional bit). x is the estimated codeword.
  function automatic void ref_decode(input int n, const ref prog_t prog, const ref int ch [1024],
                                     output bit x [1024]);
    int al [11][1024];
    bit b0 [11][1024];
    bit b1 [11][1024];
    int logn;
    logn = $clog2(n);
    for (int i = 0; i < n; i++) al[logn][i] = ch[i];
    foreach (prog[p]) begin
      int s, h, d;
      bit bv [1024];
      bit wr;
      s = prog[p].stage;
      h = (s > 0) ? 1 << (s - 1) : 0;
      d = prog[p].dst;
      wr = 0;
      case (prog[p].op)
        OP_F:  for (int i = 0; i < h; i++) al[s-1][i] = rf(al[s][i], al[s][i+h]);
        OP_G:  for (int i = 0; i < h; i++) al[s-1][i] = rg(al[s][i], al[s][i+h], b0[s-1][i]);
        OP_G0: for (int i = 0; i < h; i++) al[s-1][i] = rg(al[s][i], al[s][i+h], 0);
        OP_C, OP_C0: begin
          for (int i = 0; i < h; i++) begin
            bit l;
            l = (prog[p].op == OP_C) ? b0[s-1][i] : 0;
            bv[i] = l ^ b1[s-1][i];
            bv[i+h] = b1[s-1][i];
          end
          wr = 1;
        end
        OP_PR1, OP_P01, OP_PRSPC, OP_P0SPC: begin
          bit l [1024];
          bit r [1024];
          int gv [1024];
          int par, mn, mj;
          par = 0; mn = 1000; mj = 0;
          for (int i = 0; i < h; i++) begin
            l[i] = (prog[p].op == OP_PR1 || prog[p].op == OP_PRSPC) ? b0[s-1][i] : 0;
            gv[i] = rg(al[s][i], al[s][i+h], l[i]);
            r[i] = gv[i] < 0;
            par ^= int'(r[i]);
            if ((gv[i] < 0 ? -gv[i] : gv[i]) < mn) begin mn = gv[i] < 0 ? -gv[i] : gv[i]; mj = i; end
          end
          if ((prog[p].op == OP_PRSPC || prog[p].op == OP_P0SPC) && par == 1) r[mj] ^= 1;
          for (int i = 0; i < h; i++) begin bv[i] = l[i] ^ r[i]; bv[i+h] = r[i]; end
          wr = 1;
        end
        OP_REP: begin
          int sum;
          sum = 0;
          for (int i = 0; i < 2 * h; i++) sum += al[s][i];
          for (int i = 0; i < 2 * h; i++) bv[i] = sum < 0;
          wr = 1;
        end
        OP_SPC: begin
          int par, mn, mj;
          par = 0; mn = 1000; mj = 0;
          for (int i = 0; i < 2 * h; i++) begin
            bv[i] = al[s][i] < 0;
            par ^= int'(bv[i]);
            if ((al[s][i] < 0 ? -al[s][i] : al[s][i]) < mn) begin
              mn = al[s][i] < 0 ? -al[s][i] : al[s][i]; mj = i;
            end
          end
          if (par == 1) bv[mj] ^= 1;
          wr = 1;
        end
        OP_ML: begin
          int best, bs;
          best = 0; bs = -100000;
          for (int c = 0; c < 4; c++) begin
            int u2, u3, sc;
            u2 = c / 2; u3 = c % 2;
            sc = ((u2 ^ u3) ? -1 : 1) * (al[s][0] + al[s][2]) + (u3 ? -1 : 1) * (al[s][1] + al[s][3]);
            if (sc > bs) begin bs = sc; best = c; end
          end
          bv[0] = (best / 2) ^ (best % 2); bv[2] = bv[0];
          bv[1] = best % 2;                bv[3] = bv[1];
          wr = 1;
        end
        OP_REPSPC: begin
          int sum, par, mn, mj, gv [4];
          bit r [4];
          bit rp;
          sum = 0;
          for (int i = 0; i < 4; i++) sum += rf(al[s][i], al[s][i+4]);
          rp = sum < 0;
          par = 0; mn = 1000; mj = 0;
          for (int i = 0; i < 4; i++) begin
            gv[i] = rg(al[s][i], al[s][i+4], rp);
            r[i] = gv[i] < 0;
            par ^= int'(r[i]);
            if ((gv[i] < 0 ? -gv[i] : gv[i]) < mn) begin mn = gv[i] < 0 ? -gv[i] : gv[i]; mj = i; end
          end
          if (par == 1) r[mj] ^= 1;
          for (int i = 0; i < 4; i++) begin bv[i] = rp ^ r[i]; bv[i+4] = r[i]; end
          wr = 1;
        end
        default: ;
      endcase
      if (wr) begin
        for (int i = 0; i < (1 << s); i++) begin
          if (d == 0) b0[s][i] = bv[i];
          else        b1[s][i] = bv[i];
        end
      end
    end
    for (int i = 0; i < n; i++) x[i] = b0[logn][i];
  endfunction
  // ------------------------------------------------------------ node-level references
  // offset of the stage-s field in a packed low-stage word (independent copy)
  function automatic int ref_off(input int pe, input int s);
    int o;
    o = 0;
    for (int t = $clog2(pe); t > s; t--) o += 1 << t;
    return o;
  endfunction
  function automatic bit ref_rep(input int a []);
    int sum;
    sum = 0;
    foreach (a[i]) sum += a[i];
    return sum < 0;
  endfunction
  function automatic void ref_spc(input int a [], output bit b []);
    int par, mn, mj;
    b = new[a.size()];
    par = 0; mn = 1000; mj = 0;
    foreach (a[i]) begin
      b[i] = a[i] < 0;
      par ^= int'(b[i]);
      if ((a[i] < 0 ? -a[i] : a[i]) < mn) begin mn = a[i] < 0 ? -a[i] : a[i]; mj = i; end
    end
    if (par == 1) b[mj] ^= 1;
  endfunction
  function automatic void ref_ml(input int a [], output bit b []);
    int best, bs;
    b = new[4];
    best = 0; bs = -100000;
    for (int c = 0; c < 4; c++) begin
      int sc;
      sc = (((c / 2) ^ (c % 2)) ? -1 : 1) * (a[0] + a[2]) + ((c % 2) ? -1 : 1) * (a[1] + a[3]);
      if (sc > bs) begin bs = sc; best = c; end
    end
    b[0] = (best / 2) ^ (best % 2); b[2] = b[0];
    b[1] = best % 2;                b[3] = b[1];
  endfunction
  // left/right child LLRs of a node
  function automatic void ref_fv(input int a [], output int o []);
    o = new[a.size() / 2];
    foreach (o[i]) o[i] = rf(a[i], a[i + a.size() / 2]);
  endfunction
  function automatic void ref_gv(input int a [], input bit bl [], output int o []);
    o = new[a.size() / 2];
    foreach (o[i]) o[i] = rg(a[i], a[i + a.size() / 2], bl[i]);
  endfunction
  function automatic void ref_comb(input bit l [], input bit r [], output bit o []);
    o = new[2 * l.size()];
    foreach (l[i]) begin o[i] = l[i] ^ r[i]; o[i + l.size()] = r[i]; end
  endfunction
  function automatic void ref_const(input int n, input bit v, output bit o []);
    o = new[n];
    foreach (o[i]) o[i] = v;
  endfunction
  function automatic void ref_hd(input int a [], output bit o []);
    o = new[a.size()];
    foreach (o[i]) o[i] = a[i] < 0;
  endfunction
  // RepSPC (8) and Rep-RepSPC (16), decoded step by step
  function automatic void ref_repspc(input int a [], output bit b []);
    int fl [], gr [];
    bit l [], r [];
    ref_fv(a, fl);
    ref_const(4, ref_rep(fl), l);
    ref_gv(a, l, gr);
    ref_spc(gr, r);
    ref_comb(l, r, b);
  endfunction
  function automatic void ref_reprepspc(input int a [], output bit b []);
    int fl [], gr [];
    bit l [], r [];
    ref_fv(a, fl);
    ref_const(8, ref_rep(fl), l);
    ref_gv(a, l, gr);
    ref_repspc(gr, r);
    ref_comb(l, r, b);
  endfunction
  function automatic int rnd_llr();
    return int'($urandom % 63) - 31;
  endfunction
endpackage
