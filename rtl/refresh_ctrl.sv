// refresh_ctrl: lifecycle-aware refresh controller.
//
// Two independent distributed-refresh sequencers. The standard sequencer
// walks the rows of the standard-refresh bank (sign + exponent of every
// tensor) so that each row is refreshed at least once per T_STD_US (45 us);
// the relaxed sequencer walks the rows of the relaxed-refresh bank (KV
// mantissas) at least once per T_REL_US (1216 us). The refresh-less bank (QO
// mantissas) gets no refresh at all, so it has no sequencer. The two intervals
// and the assignment of banks to intervals are those of the published
// architecture; spreading the refreshes evenly over the interval, one row at
// a time, is this implementation's choice.
//
// Each sequencer (refresh_seq) spreads its rows evenly over its interval in
// cycles (T * CLK_MHZ) with a phase accumulator, so a full sweep takes exactly
// the interval and consecutive row refreshes are floor(T*CLK_MHZ/ROWS) or one
// cycle more apart (10 or 11 cycles for the standard bank and 593 or 594 for
// the relaxed bank at the defaults). Each refresh is a one-cycle pulse on
// *_ref_en with the row on *_ref_row; rows go in order and wrap. *_sweep
// pulses in the slot of the last row of a sweep. Refresh runs continuously
// from reset.
//
// KV footprint. kv_live_rows tells how many relaxed-bank rows (from row 0
// up) currently hold KV-cache mantissas; it grows as the cache grows during
// decoding. The relaxed sequencer keeps its timing, but in the slot of a row
// at or above kv_live_rows it issues no refresh. Relaxed refresh work is thus
// proportional to the KV footprint B_KV, as in the published power model
// P_ref,kv = 7/16 * B_KV/B_total * E_ref/T_rel; the standard bank is always
// refreshed in full (P_ref,exp = 9/16 * E_ref/T_std). Filling the KV region
// from row 0 upwards is the user's side of this contract.
module refresh_ctrl #(
  parameter int unsigned CLK_MHZ  = shield_pkg::CLK_MHZ_DEFAULT,
  parameter int unsigned T_STD_US = shield_pkg::T_STD_US,
  parameter int unsigned T_REL_US = shield_pkg::T_REL_US,
  parameter int unsigned STD_ROWS = 4096,
  parameter int unsigned REL_ROWS = 2048,
  localparam int unsigned STD_RW = (STD_ROWS > 1) ? $clog2(STD_ROWS) : 1,
  localparam int unsigned REL_RW = (REL_ROWS > 1) ? $clog2(REL_ROWS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [REL_RW:0]   kv_live_rows,
  output logic              std_ref_en,
  output logic [STD_RW-1:0] std_ref_row,
  output logic              std_sweep,
  output logic              rel_ref_en,
  output logic [REL_RW-1:0] rel_ref_row,
  output logic              rel_sweep
);

  refresh_seq #(
    .INTERVAL(longint'(T_STD_US) * CLK_MHZ),
    .ROWS    (STD_ROWS)
  ) u_std (
    .clk    (clk),
    .rst_n  (rst_n),
    .ref_en (std_ref_en),
    .ref_row(std_ref_row),
    .sweep  (std_sweep)
  );

  logic rel_slot;

  refresh_seq #(
    .INTERVAL(longint'(T_REL_US) * CLK_MHZ),
    .ROWS    (REL_ROWS)
  ) u_rel (
    .clk    (clk),
    .rst_n  (rst_n),
    .ref_en (rel_slot),
    .ref_row(rel_ref_row),
    .sweep  (rel_sweep)
  );

  // Only rows that hold live KV data are refreshed; the slot of an empty row
  // passes without a refresh.
  assign rel_ref_en = rel_slot && ({1'b0, rel_ref_row} < kv_live_rows);

endmodule
