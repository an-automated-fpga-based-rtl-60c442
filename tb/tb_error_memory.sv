// tb_error_memory: appends more records than the depth, then reads all
// entries back: the newest DEPTH records must be present at their wrapped
// addresses and count must equal the number written; clear resets count.
module tb_error_memory;
  localparam int DEPTH = 16, WW = 48;
  logic clk = 0, rst_n = 0, clear = 0, we = 0;
  logic [WW-1:0] wdata, rdata;
  logic [$clog2(DEPTH)-1:0] raddr;
  logic [31:0] count;
  logic [WW-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  error_memory #(.DEPTH(DEPTH), .WW(WW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wdata = '0; raddr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < DEPTH + 5; i++) begin
      @(negedge clk);
      we = 1;
      wdata = {16'(i), 32'($urandom)};
      model[i % DEPTH] = wdata;
    end
    @(negedge clk);
    we = 0;
    checks++;
    if (count != DEPTH + 5) failures++;
    for (int a = 0; a < DEPTH; a++) begin
      raddr = 4'(a);
      @(negedge clk);
      checks++;
      if (rdata != model[a]) failures++;
    end
    clear = 1;
    @(negedge clk);
    clear = 0;
    checks++;
    if (count != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
