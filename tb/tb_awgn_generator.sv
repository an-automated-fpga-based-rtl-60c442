// tb_awgn_generator: draws 20000 LLRs at two SNR steps and checks their mean
// and standard deviation against the BPSK/AWGN formulas (mean 4/sigma^2,
// std 4/sigma in LSBs of 0.5, rate 1/2), computed here with real arithmetic.
// Also checks that the output holds while `advance` is low.
module tb_awgn_generator;
  localparam int Q = 6;
  logic clk = 0, rst_n = 0, advance = 0;
  logic [3:0] snr_idx;
  logic signed [Q-1:0] llr;
  int checks = 0, failures = 0;

  awgn_generator #(.Q(Q)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic measure(input int idx);
    real sum, sum2, mean, sd, ebn0, s2, emean, esd;
    int n;
    logic signed [Q-1:0] held;
    snr_idx = 4'(idx);
    sum = 0; sum2 = 0; n = 20000;
    advance <= 1'b1;
    @(posedge clk);
    for (int i = 0; i < n; i++) begin
      @(posedge clk);
      sum  += real'(llr);
      sum2 += real'(llr) * real'(llr);
    end
    advance <= 1'b0;
    @(posedge clk);
    held = llr;
    repeat (5) @(posedge clk);
    checks++;
    if (llr != held) failures++;
    mean  = sum / n;
    sd    = $sqrt(sum2 / n - mean * mean);
    ebn0  = 10.0 ** (idx * 0.05);
    s2    = 1.0 / (2.0 * 0.5 * ebn0);
    emean = 4.0 / s2;
    esd   = 4.0 / $sqrt(s2);
    $display("snr %0.1f dB: mean %0.2f (exp %0.2f) std %0.2f (exp %0.2f)", idx * 0.5, mean, emean, sd, esd);
    checks++;
    if (mean < emean - 0.8 || mean > emean + 0.8) failures++;
    checks++;
    if (sd < esd * 0.85 || sd > esd * 1.15) failures++;
  endtask

  initial begin
    snr_idx = 4'd0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    measure(4);
    measure(9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
