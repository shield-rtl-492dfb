// tb_edram_bank: self-checking test of the eDRAM bank model.
//
// Runs a small bank (64 words of 7 bits, 8-word rows) with a 1 MHz clock so
// that one cycle is one microsecond and the retention steps are reached in a
// few thousand cycles. Checks:
//   - write then read back at once, with the read data one cycle later;
//   - a refresh blocks the access port (acc_ready low, a write presented in
//     that cycle is dropped);
//   - words whose rows are refreshed every 40 us keep their value for 20 ms;
//   - words left without refresh for 5 ms show roughly a 1e-1 error rate, and
//     for 20 ms roughly a 0.5 rate, with every bit already wrong at 5 ms
//     still wrong at 20 ms.
module tb_edram_bank;
  localparam int unsigned W = 7, N = 64, RWD = 8, ROWS = N / RWD;

  logic         clk = 1'b0, rst_n = 1'b0;
  logic         acc_en = 1'b0, acc_we = 1'b0;
  logic [5:0]   acc_addr = '0;
  logic [W-1:0] acc_wdata = '0;
  logic         acc_ready;
  logic [W-1:0] acc_rdata;
  logic         ref_en = 1'b0;
  logic [2:0]   ref_row = '0;

  int checks = 0, failures = 0;
  int unsigned cyc = 0;

  edram_bank #(.WIDTH(W), .WORDS(N), .ROW_WORDS(RWD), .CLK_MHZ(1), .SEED(7)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic wr(input int a, input logic [W-1:0] d);
    @(negedge clk);
    acc_en = 1'b1; acc_we = 1'b1; acc_addr = 6'(a); acc_wdata = d;
    @(negedge clk);
    acc_en = 1'b0; acc_we = 1'b0;
  endtask

  task automatic rd(input int a, output logic [W-1:0] d);
    @(negedge clk);
    acc_en = 1'b1; acc_we = 1'b0; acc_addr = 6'(a);
    @(posedge clk);
    #1 d = acc_rdata;
    @(negedge clk);
    acc_en = 1'b0;
  endtask

  task automatic refresh_row(input int r);
    @(negedge clk);
    ref_en = 1'b1; ref_row = 3'(r);
    @(negedge clk);
    ref_en = 1'b0;
  endtask

  function automatic logic [W-1:0] pattern(int a, int salt);
    return W'((a * 37 + salt * 11 + 5) ^ (a >> 2));
  endfunction

  logic [W-1:0] d, at5ms [N];
  int errs, errs5, kept;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // 1. immediate read-back and read latency
    for (int a = 0; a < N; a++) wr(a, pattern(a, 1));
    for (int a = 0; a < N; a++) begin
      rd(a, d);
      check(d == pattern(a, 1), $sformatf("read-back word %0d: %h", a, d));
    end
    @(negedge clk);
    acc_en = 1'b1; acc_we = 1'b0; acc_addr = 6'd3;
    @(posedge clk); #1;
    check(acc_rdata == pattern(3, 1), "read data valid one cycle after the read");
    @(negedge clk); acc_addr = 6'd4;
    #1 check(acc_rdata == pattern(3, 1), "read data held until the next read is clocked");
    acc_en = 1'b0;

    // 2. refresh has priority over the access port
    @(negedge clk);
    ref_en = 1'b1; ref_row = 3'd0;
    acc_en = 1'b1; acc_we = 1'b1; acc_addr = 6'd2; acc_wdata = ~pattern(2, 1);
    #1 check(acc_ready == 1'b0, "acc_ready low during refresh");
    @(negedge clk);
    ref_en = 1'b0; acc_en = 1'b0; acc_we = 1'b0;
    #1 check(acc_ready == 1'b1, "acc_ready high without refresh");
    rd(2, d);
    check(d == pattern(2, 1), "write presented during refresh is not performed");

    // 3. rows 0..3 refreshed every 40 us for 20 ms; rows 4..7 not refreshed
    for (int a = 0; a < N; a++) wr(a, pattern(a, 2));
    for (int t = 0; t < 5000 / 40; t++) begin
      for (int r = 0; r < ROWS / 2; r++) refresh_row(r);
      repeat (40 - 2 * ROWS / 2) @(negedge clk);
    end
    errs5 = 0;
    for (int a = N / 2; a < N; a++) begin
      rd(a, d);
      at5ms[a] = d;
      errs5 += $countones(d ^ pattern(a, 2));
    end
    for (int t = 0; t < 15000 / 40; t++) begin
      for (int r = 0; r < ROWS / 2; r++) refresh_row(r);
      repeat (40 - 2 * ROWS / 2) @(negedge clk);
    end
    errs = 0;
    for (int a = 0; a < N / 2; a++) begin
      rd(a, d);
      errs += $countones(d ^ pattern(a, 2));
    end
    check(errs == 0, $sformatf("refreshed rows keep their data (%0d bit errors)", errs));
    // 224 unrefreshed bits: ~22 expected at 1e-1, ~112 at 0.5
    check(errs5 >= 5 && errs5 <= 50, $sformatf("~1e-1 error rate at 5 ms (%0d/224)", errs5));
    errs = 0; kept = 0;
    for (int a = N / 2; a < N; a++) begin
      rd(a, d);
      errs += $countones(d ^ pattern(a, 2));
      kept += $countones((at5ms[a] ^ pattern(a, 2)) & ~(d ^ pattern(a, 2)));
    end
    check(errs >= 80 && errs <= 145, $sformatf("~0.5 error rate at 20 ms (%0d/224)", errs));
    $display("INFO: unrefreshed bit errors: %0d/224 at 5 ms, %0d/224 at 20 ms", errs5, errs);
    check(kept == 0, $sformatf("bits failed at 5 ms stay failed (%0d recovered)", kept));

    // 4. a fresh write restores a failed word
    wr(N - 1, pattern(N - 1, 3));
    rd(N - 1, d);
    check(d == pattern(N - 1, 3), "rewrite restores the word");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
