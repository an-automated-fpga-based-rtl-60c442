// tb_prior_memory: random single-entry writes through both ports into both
// banks, then every word of both banks is read back (1-cycle latency) and
// compared with a software copy. A final phase writes one bank while reading
// the other, as the emulator does when prior generation overlaps decoding.
module tb_prior_memory;
  localparam int GFB = 5, Q = 6, NM = 8, N = 12, EW = Q + GFB;
  logic clk = 0;
  logic wa_en = 0, wb_en = 0, wr_bank = 0, rd_bank = 0;
  logic [$clog2(N)-1:0] wa_vn, wb_vn, rd_addr;
  logic [$clog2(NM)-1:0] wa_idx, wb_idx;
  logic [EW-1:0] wa_entry, wb_entry;
  logic [NM-1:0][EW-1:0] rd_list;
  logic [NM-1:0][EW-1:0] model [2][N];
  int checks = 0, failures = 0;

  prior_memory #(.GFB(GFB), .Q(Q), .NM(NM), .N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_all(input int bank);
    for (int v = 0; v < N; v++) begin
      rd_bank = 1'(bank);
      rd_addr = 4'(v);
      @(posedge clk);
      #1;
      checks++;
      if (rd_list != model[bank][v]) begin
        failures++;
        $display("bank %0d word %0d mismatch", bank, v);
      end
      @(negedge clk);
    end
  endtask

  initial begin
    wa_vn = '0; wb_vn = '0; wa_idx = '0; wb_idx = '0; wa_entry = '0; wb_entry = '0; rd_addr = '0;
    // fill every entry of both banks once (port a even words, port b odd words)
    for (int b = 0; b < 2; b++)
      for (int v = 0; v < N; v += 2)
        for (int k = 0; k < NM; k++) begin
          @(negedge clk);
          wr_bank = 1'(b);
          wa_en = 1; wa_vn = 4'(v);     wa_idx = 3'(k); wa_entry = EW'($urandom);
          wb_en = 1; wb_vn = 4'(v + 1); wb_idx = 3'(k); wb_entry = EW'($urandom);
          model[b][v][k] = wa_entry;
          model[b][v + 1][k] = wb_entry;
        end
    // random overwrites in random banks
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      wr_bank = 1'($urandom);
      wa_en = 1; wa_vn = 4'($urandom_range(0, N - 1)); wa_idx = 3'($urandom); wa_entry = EW'($urandom);
      wb_en = 1; wb_vn = 4'($urandom_range(0, N - 1)); wb_idx = 3'($urandom); wb_entry = EW'($urandom);
      model[wr_bank][wb_vn][wb_idx] = wb_entry;
      model[wr_bank][wa_vn][wa_idx] = wa_entry;   // port a wins a collision
    end
    @(negedge clk);
    wa_en = 0; wb_en = 0;
    read_all(0);
    read_all(1);
    // write bank 1 while reading bank 0: reads must see bank 0 only
    for (int v = 0; v < N; v++) begin
      wr_bank = 1;
      wa_en = 1; wa_vn = 4'(v); wa_idx = 3'($urandom); wa_entry = EW'($urandom);
      model[1][v][wa_idx] = wa_entry;
      rd_bank = 0;
      rd_addr = 4'(v);
      @(posedge clk);
      #1;
      checks++;
      if (rd_list != model[0][v]) failures++;
      @(negedge clk);
    end
    wa_en = 0;
    read_all(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
