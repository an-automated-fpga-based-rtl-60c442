// tb_nb_decoder: decodes random prior sets on a small code (GF(8), n_m = 4,
// N = 8 columns, M = 4 rows, d_c = 4) and compares every hard decision with
// a software decoder that follows the documented schedule row by row, built
// on the ECN and VN reference models (ldpc_tb_model.svh), its own GF(8)
// log/antilog tables (x^3 + x + 1) and its own copy of the H-matrix formula.
// Also checks that a clean all-zero prior set decodes to zeros, that one
// column with a wrong most-likely symbol is corrected, and that done comes
// with the iteration counter at L - 1. EMS and min-max are both run.
module tb_nb_decoder;
  localparam int QQ = 8, GFB = 3, Q = 6, NM = 4, N = 8, M = 4, DC = 4, LSCN = 4, LSVN = 4;
  localparam int E = M * DC;
  `include "ldpc_tb_model.svh"
  logic clk = 0, rst_n = 0, start = 0, mm = 0;
  logic [7:0] iter_limit, iter;
  logic [$clog2(N)-1:0] prior_addr, post_addr;
  logic [NM-1:0][Q+GFB-1:0] prior_list;
  logic [GFB-1:0] post_sym;
  logic busy, done, post_from_partner;
  logic [NM-1:0][Q+GFB-1:0] pmem [N];
  int checks = 0, failures = 0, partner_posts = 0;
  int alog[7], lg[8];
  int colof[E], hof[E], partof[E];
  llrv_m prior[N];

  nb_decoder #(.QQ(QQ), .GFB(GFB), .Q(Q), .NM(NM), .N(N), .M(M), .DC(DC), .LSCN(LSCN),
               .LSVN(LSVN)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) prior_list <= pmem[prior_addr];
  always @(posedge clk) if (post_from_partner) partner_posts++;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int gmul(int a, int b);
    if (a == 0 || b == 0) return 0;
    return alog[(lg[a] + lg[b]) % 7];
  endfunction

  function automatic llrv_m perm(input llrv_m x, input int h, input bit inv);
    llrv_m r;
    r = x;
    for (int i = 0; i < NM; i++) r.s[i] = gmul(x.s[i], inv ? alog[(7 - lg[h]) % 7] : h);
    return r;
  endfunction

  task automatic model(input int L, input bit mmode, output int dec[N]);
    llrv_m vc[E], cv[E], u[DC], f[DC], b[DC], v[DC];
    bit cvv[E];
    int pops;
    bit exh;
    foreach (cvv[e]) cvv[e] = 0;
    for (int it = 0; it < L; it++)
      for (int r = 0; r < M; r++) begin
        for (int k = 0; k < DC; k++) begin
          int e;
          e = r * DC + k;
          u[k] = (it == 0) ? perm(prior[colof[e]], hof[e], 0) : vc[e];
        end
        f[0] = u[0];
        b[DC-1] = u[DC-1];
        for (int s = 1; s <= DC - 2; s++) f[s] = ecn_model(f[s-1], u[s], mmode, pops, exh);
        for (int s = DC - 2; s >= 1; s--) b[s] = ecn_model(b[s+1], u[s], mmode, pops, exh);
        v[0] = b[1];
        v[DC-1] = f[DC-2];
        for (int k = 1; k <= DC - 2; k++) v[k] = ecn_model(f[k-1], b[k+1], mmode, pops, exh);
        for (int k = 0; k < DC; k++) begin
          int e, pe, c;
          llrv_m vin, un;
          e = r * DC + k;
          pe = partof[e];
          c = colof[e];
          vin = perm(v[k], hof[e], 1);
          cv[e] = vin;
          cvv[e] = 1;
          un = vn_model(prior[c], vin);
          vc[pe] = perm(un, hof[pe], 0);
          if (cvv[pe]) dec[c] = vn_model(un, cv[pe]).s[0];
          else dec[c] = un.s[0];
        end
      end
  endtask

  task automatic run(input int L, input bit mmode, input string what);
    int dec[N];
    int lat;
    for (int c = 0; c < N; c++) pmem[c] = pack_llrv(prior[c]);
    model(L, mmode, dec);
    iter_limit = 8'(L);
    mm = mmode;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    lat = 1;
    while (!done) begin
      @(negedge clk);
      lat++;
    end
    checks++;
    if (int'(iter) != L - 1) failures++;
    for (int c = 0; c < N; c++) begin
      post_addr = 3'(c);
      @(negedge clk);
      checks++;
      if (int'(post_sym) != dec[c]) begin
        failures++;
        if (failures < 8) $display("%s: column %0d decided %0d, model %0d", what, c, post_sym, dec[c]);
      end
    end
  endtask

  initial begin
    int x;
    x = 1;
    for (int i = 0; i < 7; i++) begin
      alog[i] = x;
      lg[x] = i;
      x = x << 1;
      if (x & 8) x = x ^ 'hB;
    end
    for (int e = 0; e < E; e++) begin
      colof[e] = (e < E / 2) ? e % N : (13 * (e - E / 2) + 5) % N;
      hof[e] = alog[(7 * e + 1) % 7];
    end
    for (int e = 0; e < E; e++)
      for (int g = 0; g < E; g++)
        if (g != e && colof[g] == colof[e]) partof[e] = g;
    post_addr = '0;
    iter_limit = 8'd1;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // clean priors: symbol 0 most likely everywhere
    for (int c = 0; c < N; c++) begin
      prior[c] = rand_llrv(5);
      for (int i = 0; i < NM; i++) if (prior[c].s[i] == 0) prior[c].s[i] = prior[c].s[0];
      prior[c].s[0] = 0;
      for (int i = 1; i < NM; i++) prior[c].c[i] += 10;
    end
    run(2, 0, "clean");
    for (int c = 0; c < N; c++) begin
      post_addr = 3'(c);
      @(negedge clk);
      checks++;
      if (post_sym != 0) failures++;
    end
    // one wrong column: symbol 5 at cost 0, the sent 0 at cost 3
    prior[2].s[0] = 5;
    for (int i = 1; i < NM; i++) if (prior[2].s[i] == 5) prior[2].s[i] = 0;
    prior[2].c[1] = 3;
    prior[2].s[1] = 0;
    run(3, 0, "one error");
    post_addr = 3'd2;
    @(negedge clk);
    checks++;
    if (post_sym != 0) failures++;
    // random priors, both algorithms
    for (int t = 0; t < 24; t++) begin
      for (int c = 0; c < N; c++) prior[c] = rand_llrv(8);
      run(1 + t % 4, t % 2, "random");
    end
    checks++;
    if (partner_posts == 0) failures++;
    $display("posteriors formed with the partner c-v: %0d", partner_posts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
