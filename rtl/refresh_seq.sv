// refresh_seq: one distributed-refresh sequencer, used by refresh_ctrl.
//
// Spreads ROWS row refreshes evenly over INTERVAL clock cycles, so that every
// row is refreshed exactly once per INTERVAL cycles on average and never more
// than INTERVAL cycles apart. A phase accumulator adds ROWS every cycle; when
// it reaches INTERVAL it wraps (subtracting INTERVAL) and a refresh is due.
// The spacing between two refreshes is therefore floor(INTERVAL/ROWS) or
// one cycle more, and a sweep of all rows takes exactly INTERVAL cycles.
//
// ref_en pulses for one cycle (registered, one cycle after the accumulator
// wraps) with the row on ref_row; the row pointer then advances modulo ROWS.
// sweep is high together with the refresh of the last row. INTERVAL must be
// at least 2*ROWS so that the bank is free at least every other cycle.
module refresh_seq #(
  parameter longint unsigned INTERVAL = 45000,
  parameter int unsigned     ROWS     = 4096,
  localparam int unsigned RW = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned AW = $clog2(INTERVAL + longint'(ROWS) + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  output logic          ref_en,
  output logic [RW-1:0] ref_row,
  output logic          sweep
);

  localparam logic [AW-1:0] STEP     = AW'(ROWS);
  localparam logic [AW-1:0] WRAP     = AW'(INTERVAL);
  localparam logic [RW-1:0] LAST_ROW = RW'(ROWS - 1);

  logic [AW-1:0] acc, acc_next;
  logic [RW-1:0] row_ptr;
  logic          fire;

  always_comb begin
    acc_next = acc + STEP;
    fire     = (acc_next >= WRAP);
    if (fire) acc_next = acc_next - WRAP;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc     <= '0;
      row_ptr <= '0;
      ref_row <= '0;
      ref_en  <= 1'b0;
      sweep   <= 1'b0;
    end else begin
      acc    <= acc_next;
      ref_en <= fire;
      sweep  <= 1'b0;
      if (fire) begin
        ref_row <= row_ptr;
        sweep   <= (row_ptr == LAST_ROW);
        row_ptr <= (row_ptr == LAST_ROW) ? '0 : row_ptr + 1'b1;
      end
    end
  end

  initial begin
    assert (INTERVAL >= 2 * longint'(ROWS))
      else $error("refresh_seq: INTERVAL must be at least twice ROWS");
  end

endmodule
