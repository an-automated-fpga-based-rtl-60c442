// tb_perm_unit: random LLRVs and H entries. The multiplied symbols must equal
// h*beta computed with independent log/antilog tables of GF(32); dividing the
// result by h must give the input back; costs must pass unchanged.
module tb_perm_unit;
  localparam int QQ = 32, GFB = 5, Q = 6, NM = 8, EW = Q + GFB;
  logic inverse;
  logic [GFB-1:0] h;
  logic [NM-1:0][EW-1:0] in_list, out_list, fwd;
  int checks = 0, failures = 0;
  int alog[31], lg[32];

  perm_unit #(.QQ(QQ), .GFB(GFB), .Q(Q), .NM(NM)) dut (.*);

  function automatic int mul(int a, int b);
    if (a == 0 || b == 0) return 0;
    return alog[(lg[a] + lg[b]) % 31];
  endfunction

  initial begin
    int x;
    x = 1;
    for (int i = 0; i < 31; i++) begin
      alog[i] = x;
      lg[x] = i;
      x = x << 1;
      if (x & 32) x = x ^ 'h25;
    end
    for (int t = 0; t < 500; t++) begin
      h = GFB'($urandom_range(1, 31));
      for (int i = 0; i < NM; i++) in_list[i] = EW'($urandom);
      inverse = 0;
      #1;
      fwd = out_list;
      for (int i = 0; i < NM; i++) begin
        checks++;
        if (int'(fwd[i][GFB-1:0]) != mul(int'(h), int'(in_list[i][GFB-1:0])) ||
            fwd[i][EW-1:GFB] != in_list[i][EW-1:GFB]) failures++;
      end
      in_list = fwd;
      inverse = 1;
      #1;
      for (int i = 0; i < NM; i++) begin
        checks++;
        if (int'(mul(int'(h), int'(out_list[i][GFB-1:0]))) != int'(fwd[i][GFB-1:0])) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
