// tb_code_luts: checks the H-matrix tables at the default size. Every column
// must have exactly two edges, every row d_c distinct columns, partner(e) the
// other edge of e's column, and every entry must equal alpha^((7e+1) mod 31)
// computed here with log/antilog tables of GF(32) built from x^5 + x^2 + 1.
module tb_code_luts;
  localparam int N = 192, M = 96, DC = 4, GFB = 5, E = M * DC;
  logic [$clog2(E)-1:0] edge_idx;
  logic [$clog2(N)-1:0] col;
  logic [GFB-1:0] entry;
  logic [$clog2(E)-1:0] partner;
  int checks = 0, failures = 0;
  int colcnt[N];
  int colof[E];
  int alog[31];

  code_luts #(.N(N), .M(M), .DC(DC), .GFB(GFB)) dut (.*);

  initial begin
    int x;
    x = 1;
    for (int i = 0; i < 31; i++) begin
      alog[i] = x;
      x = x << 1;
      if (x & 32) x = x ^ 'h25;
    end
    foreach (colcnt[c]) colcnt[c] = 0;
    for (int e = 0; e < E; e++) begin
      edge_idx = 9'(e);
      #1;
      colof[e] = int'(col);
      colcnt[col]++;
      checks++;
      if (int'(entry) != alog[(7 * e + 1) % 31]) failures++;
    end
    for (int c = 0; c < N; c++) begin
      checks++;
      if (colcnt[c] != 2) failures++;
    end
    for (int r = 0; r < M; r++)
      for (int a = 0; a < DC; a++)
        for (int b = a + 1; b < DC; b++) begin
          checks++;
          if (colof[r * DC + a] == colof[r * DC + b]) failures++;
        end
    for (int e = 0; e < E; e++) begin
      edge_idx = 9'(e);
      #1;
      checks++;
      if (int'(partner) == e || colof[partner] != colof[e]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
