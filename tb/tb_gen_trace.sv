// tb_gen_trace: the workspace over a token-generation trace of 128 prefill
// and 256 decode steps, with the energy reduction measured step by step.
//
// Model size is scaled down to a 64-wide attention layer: every token adds
// 64 K and 64 V words to the KV cache (384 tokens -> 49152 words) and writes
// 64 Q and 64 O words to the transient QO region (16384 words, enough for the
// Q/O of the whole prefill). Rows are 1024 words and the clock is 4 MHz, so
// one relaxed sweep (1216 us) is 4864 cycles; each step takes exactly one
// sweep. In each step the test appends the token's K/V words, marks a new KV
// row live when one is started, writes the token's Q/O words, reads them back
// (sign and exponent must be exact), and counts the refresh strobes.
// The energy reduction of the step, from the refreshed bits against
// refreshing all 16 bits every 45 us, must equal
//   eta = 1 - [9/16 + 7/16 * (B_KV/B_total) * 45/1216]
// with B_KV the live KV rows. Over the trace eta must fall from about
// 1 - 9/16 = 0.4375 at the first step towards 0.4254 at the last, as the KV
// cache grows to 3/4 of the workspace.
module tb_gen_trace;
  import shield_pkg::*;
  localparam int unsigned MHZ = 4, KV = 49152, QO = 16384, ROWW = 1024, D = 64;
  localparam int unsigned PREFILL = 128, DECODE = 256, STEP_CYC = 1216 * MHZ;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        req_valid = 1'b0, req_ready, req_we = 1'b0;
  tensor_e     req_tensor = TENSOR_Q;
  logic [15:0] req_addr = '0;
  logic [15:0] req_wdata = '0;
  logic        rsp_valid;
  logic [15:0] rsp_rdata;
  logic        std_refresh, rel_refresh, std_sweep, rel_sweep;
  logic [6:0]  kv_live_rows = '0;

  shield_top #(.CLK_MHZ(MHZ), .KV_WORDS(KV), .QO_WORDS(QO), .ROW_WORDS(ROWW)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  longint unsigned cyc = 0, n_std = 0, n_rel = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (std_refresh) n_std++;
    if (rel_refresh) n_rel++;
  end

  task automatic access(input bit we, input tensor_e t, input int a, input logic [15:0] d,
                        output logic [15:0] q);
    @(negedge clk);
    req_valid = 1'b1; req_we = we; req_tensor = t; req_addr = 16'(a); req_wdata = d;
    #1;
    while (!req_ready) begin
      @(negedge clk);
      #1;
    end
    @(posedge clk);
    #1 req_valid = 1'b0;
    q = rsp_rdata;
  endtask

  function automatic logic [15:0] val(int a, int salt);
    logic [31:0] h = (32'(a) * 32'h9E37_79B1) ^ (32'(salt) * 32'h85EB_CA6B);
    return h[31:16] ^ h[15:0];
  endfunction

  logic [15:0] q;
  longint unsigned c0, s0, r0;
  int kv_fill = 0, se_err = 0;
  real eta, eta_model, eta_first = 0.0, eta_last = 0.0, max_dev = 0.0;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int step = 0; step < PREFILL + DECODE; step++) begin
      // align the step to a whole relaxed sweep
      @(negedge clk);
      c0 = cyc; s0 = n_std; r0 = n_rel;
      if (kv_fill % ROWW == 0) kv_live_rows = 7'(kv_fill / ROWW + 1);
      for (int i = 0; i < 2 * D; i++) begin
        access(1'b1, (i < D) ? TENSOR_K : TENSOR_V, kv_fill, val(kv_fill, 1), q);
        kv_fill++;
      end
      begin
        automatic int base = (step < PREFILL ? step : step % PREFILL) * 2 * D;
        for (int i = 0; i < 2 * D; i++)
          access(1'b1, (i < D) ? TENSOR_Q : TENSOR_O, base + i, val(base + i, step + 2), q);
        for (int i = 0; i < 2 * D; i++) begin
          access(1'b0, (i < D) ? TENSOR_Q : TENSOR_O, base + i, '0, q);
          se_err += $countones(q[15:7] ^ val(base + i, step + 2) >> 7);
        end
      end
      while (cyc - c0 < STEP_CYC) @(negedge clk);
      eta = 1.0 - (real'(n_std - s0) * ROWW * 9 + real'(n_rel - r0) * ROWW * 7) /
                  (real'(STEP_CYC) / (45.0 * MHZ) * (KV + QO) * 16);
      eta_model = 1.0 - (9.0 / 16 + 7.0 / 16 * (real'(kv_live_rows) * ROWW / (KV + QO))
                         * 45.0 / 1216.0);
      if (eta - eta_model > max_dev) max_dev = eta - eta_model;
      if (eta_model - eta > max_dev) max_dev = eta_model - eta;
      if (step == 0) eta_first = eta;
      eta_last = eta;
      if (step % 64 == 0 || step == PREFILL || step == PREFILL + DECODE - 1)
        $display("INFO: step %0d (%s) live KV rows %0d: eta %0.4f, model %0.4f",
                 step - int'(PREFILL), step < PREFILL ? "prefill" : "decode", kv_live_rows,
                 eta, eta_model);
      check(eta > eta_model - 0.002 && eta < eta_model + 0.002,
            $sformatf("step %0d: eta %0.4f, model %0.4f", step, eta, eta_model));
    end
    check(se_err == 0, $sformatf("Q/O sign/exponent errors %0d", se_err));
    check(kv_fill == KV, "KV cache filled to 384 tokens");
    check(eta_first > 0.435 && eta_first < 0.4376, $sformatf("first-step eta %0.4f", eta_first));
    check(eta_last > 0.424 && eta_last < 0.427, $sformatf("last-step eta %0.4f", eta_last));
    $display("INFO: eta first %0.4f last %0.4f, largest deviation from the model %0.4f",
             eta_first, eta_last, max_dev);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_200_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
