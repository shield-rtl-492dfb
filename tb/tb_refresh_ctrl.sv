// tb_refresh_ctrl: self-checking test of the lifecycle-aware refresh controller.
//
// Two instances run side by side for 2.5 million cycles:
//   - the default one (1 GHz, 4096 standard rows, 2048 relaxed rows): a
//     standard-bank row refresh every 45000/4096 = 10.99 cycles (10 or 11)
//     and a relaxed-bank one every 1216000/2048 = 593.75 cycles (593 or 594);
//   - a small one (1 MHz, 8 standard rows, 4 relaxed rows): 45/8 = 5.6 and
//     1216/4 = 304 cycles.
// For every refresh the test checks the spacing to the previous one, that
// rows come in order and wrap, that each row is revisited after exactly its
// interval (45 us or 1216 us in cycles), and that the sweep flag marks the
// last row. The refresh counts must match rows/interval over the run.
// A third, small instance has only 2 and then 3 of its 4 relaxed rows marked
// as holding live KV data: only those rows may be refreshed, still once per
// 1216 us, and its standard refresh must be unaffected.
// It also checks that at least two full sweeps of every bank were seen.
module tb_refresh_ctrl;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  longint unsigned cyc = 0;

  always #1 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // default instance
  logic        d_std_en, d_std_sw, d_rel_en, d_rel_sw;
  logic [11:0] d_std_row;
  logic [10:0] d_rel_row;
  refresh_ctrl dut_def (
    .clk, .rst_n, .kv_live_rows(12'd2048),
    .std_ref_en(d_std_en), .std_ref_row(d_std_row), .std_sweep(d_std_sw),
    .rel_ref_en(d_rel_en), .rel_ref_row(d_rel_row), .rel_sweep(d_rel_sw)
  );

  // small instance
  logic       s_std_en, s_std_sw, s_rel_en, s_rel_sw;
  logic [2:0] s_std_row;
  logic [1:0] s_rel_row;
  refresh_ctrl #(.CLK_MHZ(1), .STD_ROWS(8), .REL_ROWS(4)) dut_small (
    .clk, .rst_n, .kv_live_rows(3'd4),
    .std_ref_en(s_std_en), .std_ref_row(s_std_row), .std_sweep(s_std_sw),
    .rel_ref_en(s_rel_en), .rel_ref_row(s_rel_row), .rel_sweep(s_rel_sw)
  );

  // gated instance: only the live KV rows get relaxed refresh
  logic       g_std_en, g_std_sw, g_rel_en, g_rel_sw;
  logic [2:0] g_std_row;
  logic [1:0] g_rel_row;
  logic [2:0] g_live = 3'd2;
  refresh_ctrl #(.CLK_MHZ(1), .STD_ROWS(8), .REL_ROWS(4)) dut_gated (
    .clk, .rst_n, .kv_live_rows(g_live),
    .std_ref_en(g_std_en), .std_ref_row(g_std_row), .std_sweep(g_std_sw),
    .rel_ref_en(g_rel_en), .rel_ref_row(g_rel_row), .rel_sweep(g_rel_sw)
  );
  int unsigned g_cnt1 [4] = '{default: 0};
  int unsigned g_cnt2 [4] = '{default: 0};
  int unsigned g_sweeps = 0;
  longint unsigned g_last0 = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  // Checker for one refresh stream
  class stream_chk;
    string           name;
    longint unsigned period, interval, rows;  // period = floor(interval/rows)
    longint unsigned last_fire, n_fire, n_sweep;
    longint unsigned expect_row;
    longint unsigned last_visit[];
    function new(string nm, longint unsigned iv, longint unsigned r);
      name = nm; period = iv / r; interval = iv; rows = r;
      last_fire = 0; n_fire = 0; n_sweep = 0; expect_row = 0;
      last_visit = new[int'(r)];
      foreach (last_visit[i]) last_visit[i] = 0;
    endfunction
    task automatic sample(logic en, longint unsigned row, logic sw, longint unsigned now);
      if (!en) return;
      if (n_fire > 0)
        check(now - last_fire == period || now - last_fire == period + 1,
              $sformatf("%s: spacing %0d, expected %0d or one more", name, now - last_fire, period));
      check(row == expect_row, $sformatf("%s: row %0d, expected %0d", name, row, expect_row));
      if (last_visit[row] != 0)
        check(now - last_visit[row] == interval,
            $sformatf("%s: row %0d revisited after %0d cycles, not %0d", name, row,
                      now - last_visit[row], interval));
      check(sw == (row == rows - 1), $sformatf("%s: sweep flag wrong at row %0d", name, row));
      if (sw) n_sweep++;
      last_visit[row] = now;
      last_fire = now;
      n_fire++;
      expect_row = (expect_row + 1) % rows;
    endtask
  endclass

  stream_chk c_dstd = new("default std", 45000,   4096);
  stream_chk c_drel = new("default rel", 1216000, 2048);
  stream_chk c_sstd = new("small std",   45,      8);
  stream_chk c_srel = new("small rel",   1216,    4);

  always @(posedge clk) if (rst_n) begin
    c_dstd.sample(d_std_en, 64'(d_std_row), d_std_sw, cyc);
    c_drel.sample(d_rel_en, 64'(d_rel_row), d_rel_sw, cyc);
    c_sstd.sample(s_std_en, 64'(s_std_row), s_std_sw, cyc);
    c_srel.sample(s_rel_en, 64'(s_rel_row), s_rel_sw, cyc);
    if (g_rel_en) begin
      if (g_live == 3'd2) g_cnt1[g_rel_row]++; else g_cnt2[g_rel_row]++;
      if (g_rel_row == 2'd0) begin
        if (g_last0 != 0) check(cyc - g_last0 == 1216, "gated: live row 0 every 1216 cycles");
        g_last0 = cyc;
      end
    end
    if (g_rel_sw) g_sweeps++;
    check(g_std_en == s_std_en, "gated: standard refresh unaffected by the KV footprint");
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (1_000_000) @(posedge clk);
    g_live = 3'd3;                       // KV cache grows by one row
    repeat (1_500_000) @(posedge clk);
    check(g_cnt1[0] > 0 && g_cnt1[1] > 0 && g_cnt1[2] == 0 && g_cnt1[3] == 0,
          $sformatf("gated, 2 live rows: counts %0d %0d %0d %0d",
                    g_cnt1[0], g_cnt1[1], g_cnt1[2], g_cnt1[3]));
    check(g_cnt2[0] > 0 && g_cnt2[1] > 0 && g_cnt2[2] > 0 && g_cnt2[3] == 0,
          $sformatf("gated, 3 live rows: counts %0d %0d %0d %0d",
                    g_cnt2[0], g_cnt2[1], g_cnt2[2], g_cnt2[3]));
    check(g_cnt1[0] + g_cnt2[0] >= 2_500_000 / 1216 && g_cnt1[0] + g_cnt2[0] <= 2_500_000 / 1216 + 1,
          $sformatf("gated: live row refreshed once per interval (%0d)", g_cnt1[0] + g_cnt2[0]));
    check(g_sweeps == 2_500_000 / 1216, "gated: sweep timing kept for empty rows");
    check(c_dstd.n_sweep >= 2, $sformatf("default std sweeps: %0d", c_dstd.n_sweep));
    check(c_drel.n_sweep >= 2, $sformatf("default rel sweeps: %0d", c_drel.n_sweep));
    check(c_sstd.n_sweep >= 2, $sformatf("small std sweeps: %0d", c_sstd.n_sweep));
    check(c_srel.n_sweep >= 2, $sformatf("small rel sweeps: %0d", c_srel.n_sweep));
    // refresh counts over the run: one per period
    check(c_dstd.n_fire == 2_500_000 * 4096 / 45000,
          $sformatf("default std refresh count %0d", c_dstd.n_fire));
    check(c_drel.n_fire == 2_500_000 * 2048 / 1216000,
          $sformatf("default rel refresh count %0d", c_drel.n_fire));
    $display("INFO: refreshes std=%0d rel=%0d, sweeps std=%0d rel=%0d",
             c_dstd.n_fire, c_drel.n_fire, c_dstd.n_sweep, c_drel.n_sweep);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
