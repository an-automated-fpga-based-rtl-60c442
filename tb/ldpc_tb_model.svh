// ldpc_tb_model.svh: reference models shared by the decoder testbenches.
//
// An LLRV is an int array of NM (cost, symbol) pairs. The models reproduce
// the documented arithmetic and tie order of the hardware with plain loops:
//   ecn_model : all A x B pairs sorted by (cost, row, column), first
//               occurrence of each symbol kept until NM symbols are found
//   vn_model  : candidates P[k] (first occurrence) and C[k] (symbol not in P)
//               in stream order, stable sort by cost, normalised
// Include inside a module that defines localparams GFB, Q, NM, LSCN, LSVN.

typedef struct { int c[NM]; int s[NM]; } llrv_m;

function automatic int cmax_m();
  return (1 << Q) - 1;
endfunction

function automatic llrv_m rand_llrv(input int spread);
  llrv_m r;
  int used[int];
  int c;
  c = 0;
  for (int i = 0; i < NM; i++) begin
    int s;
    do s = $urandom_range(0, (1 << GFB) - 1); while (used.exists(s));
    used[s] = 1;
    if (i > 0) c = c + $urandom_range(0, spread);
    if (c > cmax_m()) c = cmax_m();
    r.c[i] = c;
    r.s[i] = s;
  end
  return r;
endfunction

function automatic llrv_m ecn_model(input llrv_m a, input llrv_m b, input bit mm,
                                    output int pops, output bit exhausted);
  llrv_m r;
  int pc[$], pi[$], pj[$];
  int seen[int];
  int n, rows;
  rows = (LSCN < NM) ? LSCN : NM;
  for (int i = 0; i < NM; i++) begin
    r.c[i] = cmax_m();
    r.s[i] = 0;
  end
  for (int i = 0; i < rows; i++)
    for (int j = 0; j < NM; j++) begin
      int c;
      c = mm ? ((a.c[i] > b.c[j]) ? a.c[i] : b.c[j]) : a.c[i] + b.c[j];
      if (c > cmax_m()) c = cmax_m();
      pc.push_back(c); pi.push_back(i); pj.push_back(j);
    end
  // selection order (cost, row, column)
  n = 0; pops = 0; exhausted = 1;
  while (pc.size() > 0) begin
    int best;
    best = 0;
    for (int t = 1; t < pc.size(); t++)
      if (pc[t] < pc[best] || (pc[t] == pc[best] &&
          (pi[t] < pi[best] || (pi[t] == pi[best] && pj[t] < pj[best])))) best = t;
    pops++;
    begin
      int s;
      s = a.s[pi[best]] ^ b.s[pj[best]];
      if (!seen.exists(s)) begin
        seen[s] = 1;
        r.c[n] = pc[best];
        r.s[n] = s;
        n++;
      end
    end
    pc.delete(best); pi.delete(best); pj.delete(best);
    if (n == NM) begin
      exhausted = 0;
      break;
    end
  end
  return r;
endfunction

function automatic llrv_m vn_model(input llrv_m p, input llrv_m c);
  llrv_m r;
  int kc[$], ks[$];
  int pfirst[int], cfirst[int];
  for (int i = NM - 1; i >= 0; i--) begin
    pfirst[p.s[i]] = i;
    cfirst[c.s[i]] = i;
  end
  for (int k = 0; k < NM; k++) begin
    if (pfirst[p.s[k]] == k) begin
      kc.push_back(p.c[k] + (cfirst.exists(p.s[k]) ? c.c[cfirst[p.s[k]]] : c.c[NM-1]));
      ks.push_back(p.s[k]);
    end
    if (!pfirst.exists(c.s[k]) && cfirst[c.s[k]] == k) begin
      kc.push_back(c.c[k] + p.c[NM-1]);
      ks.push_back(c.s[k]);
    end
  end
  // stable selection of the smallest LSVN
  for (int i = 0; i < NM; i++) begin
    r.c[i] = cmax_m();
    r.s[i] = 0;
  end
  begin
    int base;
    for (int i = 0; i < LSVN && i < NM && kc.size() > 0; i++) begin
      int best;
      best = 0;
      for (int t = 1; t < kc.size(); t++) if (kc[t] < kc[best]) best = t;
      if (i == 0) base = kc[best];
      r.c[i] = (kc[best] - base > cmax_m()) ? cmax_m() : kc[best] - base;
      r.s[i] = ks[best];
      kc.delete(best); ks.delete(best);
    end
  end
  return r;
endfunction

function automatic logic [NM-1:0][Q+GFB-1:0] pack_llrv(input llrv_m m);
  logic [NM-1:0][Q+GFB-1:0] v;
  for (int i = 0; i < NM; i++) v[i] = {Q'(m.c[i]), GFB'(m.s[i])};
  return v;
endfunction

function automatic int llrv_diff(input logic [NM-1:0][Q+GFB-1:0] v, input llrv_m m);
  int d;
  d = 0;
  for (int i = 0; i < NM; i++) if (v[i] != {Q'(m.c[i]), GFB'(m.s[i])}) d++;
  return d;
endfunction
