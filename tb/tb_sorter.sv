// tb_sorter: random single and double inserts into an 8-entry sorter; after
// every cycle the contents must equal the 8 smallest keys inserted since the
// last clear (kept by a plain queue model), and each entry's data must be the
// tag that was inserted with that key.
module tb_sorter;
  localparam int LEN = 8, KW = 6, DW = 8;
  logic clk = 0, rst_n = 0, clear = 0;
  logic [1:0] in_valid = '0;
  logic [1:0][KW-1:0] in_key;
  logic [1:0][DW-1:0] in_data;
  logic [LEN-1:0][KW-1:0] out_key;
  logic [LEN-1:0][DW-1:0] out_data;
  int checks = 0, failures = 0;
  int keys[$];
  int tag_key[256];
  int tag;

  sorter #(.LEN(LEN), .KW(KW), .DW(DW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    int s[$];
    s = keys;
    s.sort();
    for (int i = 0; i < LEN; i++) begin
      int exp;
      exp = (i < s.size()) ? s[i] : (1 << KW) - 1;
      checks++;
      if (out_key[i] != KW'(exp)) begin
        failures++;
        if (failures < 10) $display("mismatch slot %0d: got %0d exp %0d", i, out_key[i], exp);
      end
      if (i < s.size()) begin
        checks++;
        if (tag_key[out_data[i]] != int'(out_key[i])) failures++;
      end
    end
  endtask

  initial begin
    tag = 0;
    in_key = '0; in_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int round = 0; round < 40; round++) begin
      clear <= 1'b1;
      @(posedge clk);
      clear <= 1'b0;
      keys.delete();
      for (int n = 0; n < 12; n++) begin
        logic [1:0] v;
        v = 2'($urandom_range(1, 3));
        for (int c = 0; c < 2; c++) begin
          in_key[c]  <= KW'($urandom_range(0, (1 << KW) - 2));
          in_data[c] <= DW'(tag);
          tag = (tag + 1) % 256;
        end
        in_valid <= v;
        @(negedge clk);
        for (int c = 0; c < 2; c++) begin
          if (in_valid[c]) begin
            keys.push_back(int'(in_key[c]));
            tag_key[in_data[c]] = int'(in_key[c]);
          end
        end
        @(posedge clk);
        in_valid <= '0;
        #1;
        compare();
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
