// tb_vn_unit: random LLRV pairs (some sharing symbols, some not) through the
// VN unit; the result must equal vn_model of ldpc_tb_model.svh entry by entry
// and done must come exactly n_m + 3 cycles after start.
module tb_vn_unit;
  localparam int GFB = 5, Q = 6, NM = 8, LSCN = 8, LSVN = 8;
  `include "ldpc_tb_model.svh"
  logic clk = 0, rst_n = 0, start = 0;
  logic [NM-1:0][Q+GFB-1:0] p_list, c_list, o_list;
  logic busy, done;
  int checks = 0, failures = 0;

  vn_unit #(.GFB(GFB), .Q(Q), .NM(NM), .LSVN(LSVN)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      llrv_m p, c, r;
      int lat;
      p = rand_llrv(8);
      c = rand_llrv((t % 5 == 0) ? 30 : 8);
      if (t % 7 == 0) c = p;                       // identical symbol sets
      r = vn_model(p, c);
      @(negedge clk);
      p_list = pack_llrv(p);
      c_list = pack_llrv(c);
      start = 1;
      @(negedge clk);
      start = 0;
      lat = 1;
      while (!done) begin
        @(negedge clk);
        lat++;
      end
      checks++;
      if (llrv_diff(o_list, r) != 0) begin
        failures++;
        if (failures < 5) begin
          $display("t=%0d mismatch", t);
          for (int i = 0; i < NM; i++)
            $display("  %0d: got %0d/%0d exp %0d/%0d", i, o_list[i][Q+GFB-1:GFB], o_list[i][GFB-1:0], r.c[i], r.s[i]);
        end
      end
      checks++;
      if (lat != NM + 3) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
