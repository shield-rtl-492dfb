// tb_shield_top: end-to-end test of the segmented eDRAM workspace.
//
// A reduced workspace (4 MHz clock, so 4 cycles per microsecond; KV and QO
// regions of 512 words each; 64-word rows) goes through the activation
// lifecycle of an attention layer sequence:
//   1. prefill: half of the KV region is filled with K and V words, each
//      read back at once (exact); kv_live_rows follows the filled rows;
//   2. eight layers: each writes fresh Q and O words, leaves them for about
//      1.3 ms (inside the 1.5 ms QO lifetime) and reads them back, appends
//      32 words to the KV cache (decode) and reads part of it;
//   3. the whole KV cache is read after about 14 ms under relaxed refresh;
//   4. the last QO words are left 10 ms longer than their lifetime and read.
// Checks: sign and exponent always exact; QO mantissas within their lifetime
// and KV mantissas under relaxed refresh show at most a handful of errors
// (the cell model predicts <= 4e-4 and <= 1e-4 per bit); expired QO
// mantissas are heavily corrupted (refresh really is off for them); every
// read answers one cycle after acceptance; the refresh work measured from the
// refresh strobes gives the energy reduction predicted by
//   eta = 1 - [9/16 + 7/16 * (B_KV/B_total) * T_std/T_rel]
// with B_KV the time-averaged live KV footprint, and the relaxed refreshes
// must match those due for the live rows. Each mechanism (refresh stall,
// relaxed refresh, relaxed refresh skipped for an empty KV row, standard and
// relaxed sweeps, QO access while the relaxed bank refreshes, QO expiry)
// must be seen at least once.
module tb_shield_top;
  import shield_pkg::*;
  localparam int unsigned MHZ = 4, KV = 512, QO = 512, ROWW = 64;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        req_valid = 1'b0, req_ready, req_we = 1'b0;
  tensor_e     req_tensor = TENSOR_Q;
  logic [8:0]  req_addr = '0;
  logic [15:0] req_wdata = '0;
  logic        rsp_valid;
  logic [15:0] rsp_rdata;
  logic        std_refresh, rel_refresh, std_sweep, rel_sweep;
  logic [3:0]  kv_live_rows = '0;

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

  // mechanism and energy counters
  longint unsigned cyc = 0, n_std_ref = 0, n_rel_ref = 0, n_std_sweep = 0, n_rel_sweep = 0;
  longint unsigned n_stall = 0, n_qo_during_rel = 0, n_expired_bits = 0, n_rel_skip = 0;
  real exp_rel_rows = 0.0, live_word_cycles = 0.0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    exp_rel_rows     += real'(kv_live_rows) / (1216.0 * MHZ);  // due relaxed row refreshes
    live_word_cycles += real'(kv_live_rows) * ROWW;
    if (dut.u_rfc.rel_slot && !rel_refresh) n_rel_skip++;
    if (std_refresh) n_std_ref++;
    if (rel_refresh) n_rel_ref++;
    if (std_sweep)   n_std_sweep++;
    if (rel_sweep)   n_rel_sweep++;
    if (req_valid && !req_ready) n_stall++;
    if (req_valid && req_ready && rel_refresh &&
        (req_tensor == TENSOR_Q || req_tensor == TENSOR_O)) n_qo_during_rel++;
  end

  logic [15:0] ref_kv [KV];
  logic [15:0] ref_qo [QO];

  task automatic access(input bit we, input tensor_e t, input int a, input logic [15:0] d,
                        output logic [15:0] q);
    @(negedge clk);
    req_valid = 1'b1; req_we = we; req_tensor = t; req_addr = 9'(a); req_wdata = d;
    #1;
    while (!req_ready) begin
      @(negedge clk);
      #1;
    end
    @(posedge clk);               // accepted at this edge
    #1 req_valid = 1'b0;          // response registered at the same edge
    if (!we) begin
      check(rsp_valid, "read answered one cycle after acceptance");
      q = rsp_rdata;
    end else begin
      check(!rsp_valid, "no response to a write");
      q = '0;
    end
  endtask

  task automatic wait_us(input int us);
    repeat (us * MHZ) @(posedge clk);
  endtask

  // the KV cache grows from address 0 upwards, K and V interleaved
  function automatic tensor_e kv_tensor(int a);
    return (a % 2 == 0) ? TENSOR_K : TENSOR_V;
  endfunction

  int kv_filled = 0;
  task automatic kv_append(input int n);
    logic [15:0] q;
    for (int i = 0; i < n; i++) begin
      automatic int a = kv_filled;
      if (a % ROWW == 0) kv_live_rows = 4'(a / ROWW + 1);   // a new row comes alive
      ref_kv[a] = 16'($urandom);
      access(1'b1, kv_tensor(a), a, ref_kv[a], q);
      access(1'b0, kv_tensor(a), a, '0, q);
      check(q == ref_kv[a], $sformatf("KV word %0d read-back %h, expected %h", a, q, ref_kv[a]));
      kv_filled++;
    end
  endtask
  function automatic tensor_e qo_tensor(int a);
    return (a < QO / 2) ? TENSOR_Q : TENSOR_O;
  endfunction

  // read a whole region; count sign/exponent and mantissa bit errors
  task automatic read_region(input bit kv, output int se_err, output int m_err);
    logic [15:0] q, e;
    se_err = 0; m_err = 0;
    for (int a = 0; a < (kv ? KV : QO); a++) begin
      access(1'b0, kv ? kv_tensor(a) : qo_tensor(a), a, '0, q);
      e = kv ? ref_kv[a] : ref_qo[a];
      se_err += $countones(q[15:7] ^ e[15:7]);
      m_err  += $countones(q[6:0] ^ e[6:0]);
    end
  endtask

  logic [15:0] q;
  int se_err, m_err, m_tot_qo = 0;
  real eta_meas, eta_model, base_bits, shield_bits;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // 1. prefill: half of the KV region, with immediate read-back
    kv_append(KV / 2);

    // 2. layers: transient Q/O live ~1.3 ms; decode reads part of the KV cache
    for (int layer = 0; layer < 8; layer++) begin
      for (int a = 0; a < QO; a++) begin
        ref_qo[a] = 16'($urandom);
        access(1'b1, qo_tensor(a), a, ref_qo[a], q);
      end
      wait_us(1100);
      read_region(1'b0, se_err, m_err);
      check(se_err == 0, $sformatf("layer %0d: QO sign/exponent errors %0d", layer, se_err));
      m_tot_qo += m_err;
      kv_append(KV / 16);                  // decode appends to the KV cache
      for (int i = 0; i < 64; i++) begin
        automatic int a = $urandom_range(0, kv_filled - 1);
        access(1'b0, kv_tensor(a), a, '0, q);
        check(q[15:7] == ref_kv[a][15:7], $sformatf("KV word %0d sign/exponent in decode", a));
      end
    end
    // 8 x 3584 QO mantissa bits at <= 4e-4: about 11 expected at worst
    check(m_tot_qo <= 30, $sformatf("QO mantissa errors within lifetime: %0d of 28672 bits", m_tot_qo));

    // 3. the KV cache after ~14 ms under relaxed refresh
    read_region(1'b1, se_err, m_err);
    check(se_err == 0, $sformatf("KV sign/exponent errors %0d", se_err));
    check(m_err <= 6, $sformatf("KV mantissa errors under relaxed refresh: %0d of 3584", m_err));
    $display("INFO: QO mantissa bit errors in lifetime %0d/28672, KV mantissa %0d/3584",
             m_tot_qo, m_err);

    // 4. QO words kept past their lifetime: the mantissa decays, exponent stays
    wait_us(10000);
    read_region(1'b0, se_err, m_err);
    n_expired_bits = longint'(m_err);
    check(se_err == 0, $sformatf("expired QO: sign/exponent errors %0d", se_err));
    check(m_err > 3584 / 4, $sformatf("expired QO mantissa errors %0d of 3584", m_err));

    // energy: refreshed bits against refreshing all 16 bits of every word every
    // 45 us; B_KV is the time-averaged live KV footprint
    check(kv_filled == KV && kv_live_rows == 4'(KV / ROWW), "KV cache grew to the full region");
    check(real'(n_rel_ref) > exp_rel_rows - 2.0 && real'(n_rel_ref) < exp_rel_rows + 2.0,
          $sformatf("relaxed refreshes %0d, due %0.1f for the live KV rows", n_rel_ref, exp_rel_rows));
    shield_bits = real'(n_std_ref) * ROWW * 9 + real'(n_rel_ref) * ROWW * 7;
    base_bits   = real'(cyc) / (45.0 * MHZ) * (KV + QO) * 16;
    eta_meas    = 1.0 - shield_bits / base_bits;
    eta_model   = 1.0 - (9.0 / 16 + 7.0 / 16 * (live_word_cycles / real'(cyc) / (KV + QO))
                         * 45.0 / 1216.0);
    $display("INFO: eta measured %0.4f, model %0.4f; refreshes std=%0d rel=%0d over %0d cycles",
             eta_meas, eta_model, n_std_ref, n_rel_ref, cyc);
    check(eta_meas > eta_model - 0.003 && eta_meas < eta_model + 0.003, "energy reduction eta");

    // every mechanism seen
    $display("INFO: stalls=%0d std_sweeps=%0d rel_sweeps=%0d qo_during_rel=%0d expired_bits=%0d",
             n_stall, n_std_sweep, n_rel_sweep, n_qo_during_rel, n_expired_bits);
    check(n_stall > 0, "refresh stall seen");
    check(n_rel_ref > 0, "relaxed refresh seen");
    check(n_std_sweep > 0, "standard sweep seen");
    check(n_rel_sweep > 0, "relaxed sweep seen");
    check(n_qo_during_rel > 0, "QO access while the relaxed bank refreshes seen");
    check(n_expired_bits > 0, "QO mantissa expiry seen");
    check(n_rel_skip > 0, $sformatf("relaxed refresh skipped for empty KV rows: %0d", n_rel_skip));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
