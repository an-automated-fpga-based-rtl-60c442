// tb_error_collector: 30 frames of random per-symbol reports (some frames
// error-free). FE, SE, BE and the frame count must equal the sums kept here,
// and every frame with errors must produce exactly one log record
// {frame number, symbol errors, bit errors}; clear must zero everything.
module tb_error_collector;
  localparam int CW = 32, BEW = 3;
  logic clk = 0, rst_n = 0, clear = 0, sym_valid = 0, sym_err = 0, frame_end = 0;
  logic [BEW-1:0] bit_errs;
  logic [CW-1:0] fe, se, be, frames;
  logic log_we;
  logic [47:0] log_data;
  int checks = 0, failures = 0;
  int efe = 0, ese = 0, ebe = 0, logs = 0;
  logic [47:0] exp_log [$];

  error_collector #(.CW(CW), .BEW(BEW)) dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n && log_we) begin
    logs++;
    checks++;
    if (exp_log.size() == 0 || log_data != exp_log.pop_front()) failures++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit_errs = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 30; f++) begin
      int fse, fbe;
      bit clean;
      fse = 0; fbe = 0;
      clean = ($urandom_range(0, 2) == 0);
      for (int s = 0; s < 20; s++) begin
        @(negedge clk);
        sym_valid = 1;
        bit_errs  = clean ? '0 : 3'($urandom_range(0, 5));
        sym_err   = (bit_errs != 0);
        frame_end = (s == 19);
        fse += sym_err;
        fbe += bit_errs;
      end
      if (fse > 0) begin
        efe++;
        exp_log.push_back({16'(f), 16'(fse), 16'(fbe)});
      end
      ese += fse;
      ebe += fbe;
      @(negedge clk);
      sym_valid = 0;
      frame_end = 0;
      repeat (3) @(negedge clk);
    end
    checks++;
    if (fe != CW'(efe) || se != CW'(ese) || be != CW'(ebe) || frames != 30) failures++;
    checks++;
    if (logs != efe || exp_log.size() != 0) failures++;
    clear = 1;
    @(negedge clk);
    clear = 0;
    checks++;
    if (fe != 0 || se != 0 || be != 0 || frames != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
