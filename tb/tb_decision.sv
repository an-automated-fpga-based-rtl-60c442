// tb_decision: a posterior-memory model with random decisions (some zero);
// every reported column must carry the right error flag and bit count, in
// address order, and done must come N + 1 cycles after start.
module tb_decision;
  localparam int N = 24, GFB = 5;
  logic clk = 0, rst_n = 0, start = 0;
  logic [$clog2(N)-1:0] post_addr;
  logic [GFB-1:0] post_sym;
  logic sym_valid, sym_err, done;
  logic [2:0] bit_errs;
  logic [GFB-1:0] pmem [N];
  int checks = 0, failures = 0;

  decision #(.N(N), .GFB(GFB)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) post_sym <= pmem[post_addr];

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int round = 0; round < 4; round++) begin
      int col, lat;
      for (int i = 0; i < N; i++) pmem[i] = ($urandom_range(0, 2) == 0) ? GFB'($urandom) : '0;
      if (round == 0) begin
        repeat (2) @(posedge clk);
        rst_n = 1;
      end
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      col = 0;
      lat = 1;
      while (!done) begin
        if (sym_valid) begin
          checks++;
          if (sym_err != (pmem[col] != 0) || int'(bit_errs) != $countones(pmem[col])) failures++;
          col++;
        end
        @(negedge clk);
        lat++;
      end
      checks++;
      if (sym_err != (pmem[col] != 0) || int'(bit_errs) != $countones(pmem[col]) || !sym_valid) failures++;
      col++;
      checks++;
      if (col != N || lat != N + 1) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
