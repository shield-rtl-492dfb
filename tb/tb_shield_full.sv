// tb_shield_full: one complete operation of the workspace at its default size
// (2 MB: 512 Ki-word KV region, 512 Ki-word QO region, 256-word rows, 1 GHz).
//
// Sequence: fill the whole KV region with K and V words, marking each KV row
// live (kv_live_rows) as it is reached; fill the whole QO
// region with Q and O words; read the QO region back (its words are about
// 0.6 ms old, inside the 1.5 ms QO lifetime); read the KV region back (up to
// about 2.3 ms old, kept by relaxed refresh). Sign and exponent fields must
// come back exact; mantissa errors must stay within what the cell model
// allows (<= 1e-5 per bit for QO words younger than 767 us, <= 1e-4 for KV
// words under the 1216 us refresh); every read is answered one cycle after
// acceptance. At the end, the refresh strobes give the energy reduction
// against refreshing all 16 bits every 45 us, which must match
// eta = 1 - [9/16 + 7/16 * B_KV/B_total * 45/1216] with B_KV the
// time-averaged live KV footprint (0.4294 for a full KV region).
module tb_shield_full;
  import shield_pkg::*;
  localparam int unsigned KV = KV_WORDS_DEFAULT, QO = QO_WORDS_DEFAULT;
  localparam int unsigned ROWW = ROW_WORDS_DEFAULT, MHZ = CLK_MHZ_DEFAULT;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        req_valid = 1'b0, req_ready, req_we = 1'b0;
  tensor_e     req_tensor = TENSOR_Q;
  logic [18:0] req_addr = '0;
  logic [15:0] req_wdata = '0;
  logic        rsp_valid;
  logic [15:0] rsp_rdata;
  logic        std_refresh, rel_refresh, std_sweep, rel_sweep;
  logic [11:0] kv_live_rows = '0;

  shield_top dut (.*);

  always #1 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  longint unsigned cyc = 0, n_std_ref = 0, n_rel_ref = 0, n_stall = 0, n_rel_sweep = 0;
  real live_word_cycles = 0.0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    live_word_cycles += real'(kv_live_rows) * ROWW;
    if (std_refresh) n_std_ref++;
    if (rel_refresh) n_rel_ref++;
    if (rel_sweep)   n_rel_sweep++;
    if (req_valid && !req_ready) n_stall++;
  end

  // reference data is a function of address and region, so no copy is kept
  function automatic logic [15:0] word_of(bit kv, int a);
    logic [31:0] h = (32'(a) ^ (kv ? 32'h5bd1_e995 : 32'h1b87_3593)) * 32'h9E37_79B1;
    return h[31:16] ^ h[15:0];
  endfunction

  task automatic access(input bit we, input tensor_e t, input int a, input logic [15:0] d,
                        output logic [15:0] q);
    @(negedge clk);
    req_valid = 1'b1; req_we = we; req_tensor = t; req_addr = 19'(a); req_wdata = d;
    #0.1;
    while (!req_ready) begin
      @(negedge clk);
      #0.1;
    end
    @(posedge clk);
    #0.1 req_valid = 1'b0;
    q = rsp_rdata;
    if (!we && !rsp_valid) check(1'b0, "read answered one cycle after acceptance");
  endtask

  task automatic region(input bit we, input bit kv, output longint se_err, output longint m_err);
    logic [15:0] q, e;
    se_err = 0; m_err = 0;
    for (int a = 0; a < (kv ? KV : QO); a++) begin
      e = word_of(kv, a);
      if (we && kv && a % ROWW == 0) kv_live_rows = 12'(a / ROWW + 1);  // KV row comes alive
      access(we, kv ? ((a < KV / 2) ? TENSOR_K : TENSOR_V)
                    : ((a < QO / 2) ? TENSOR_Q : TENSOR_O), a, e, q);
      if (!we) begin
        se_err += $countones(q[15:7] ^ e[15:7]);
        m_err  += $countones(q[6:0] ^ e[6:0]);
      end
    end
  endtask

  longint se_err, m_err_qo, m_err_kv;
  real eta_meas, eta_model;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    region(1'b1, 1'b1, se_err, m_err_kv);   // prefill KV
    region(1'b1, 1'b0, se_err, m_err_qo);   // write Q and O
    region(1'b0, 1'b0, se_err, m_err_qo);   // read Q and O
    check(se_err == 0, $sformatf("QO sign/exponent errors %0d", se_err));
    check(m_err_qo <= 150, $sformatf("QO mantissa errors %0d of %0d bits", m_err_qo, QO * 7));
    region(1'b0, 1'b1, se_err, m_err_kv);   // read K and V
    check(se_err == 0, $sformatf("KV sign/exponent errors %0d", se_err));
    check(m_err_kv <= 800, $sformatf("KV mantissa errors %0d of %0d bits", m_err_kv, KV * 7));

    eta_meas  = 1.0 - (real'(n_std_ref) * ROWW * 9 + real'(n_rel_ref) * ROWW * 7) /
                      (real'(cyc) / (45.0 * MHZ) * (real'(KV) + QO) * 16);
    eta_model = 1.0 - (9.0 / 16 + 7.0 / 16 * (live_word_cycles / real'(cyc) / (real'(KV) + QO))
                       * 45.0 / 1216.0);
    $display("INFO: %0d cycles, stalls=%0d, relaxed sweeps=%0d, mantissa bit errors QO=%0d KV=%0d",
             cyc, n_stall, n_rel_sweep, m_err_qo, m_err_kv);
    $display("INFO: eta measured %0.4f, model %0.4f", eta_meas, eta_model);
    check(eta_meas > eta_model - 0.003 && eta_meas < eta_model + 0.003, "energy reduction eta");
    check(n_stall > 0 && n_rel_sweep > 0, "refresh stalls and a relaxed sweep seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (6_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
