// edram_bank: BEHAVIOURAL MODEL of one 3T gain-cell eDRAM bank. The storage
// array and its ports are ordinary logic; the charge-retention behaviour is
// a statistical model of the analog cell and is not meant for synthesis.
//
// The bank holds WORDS words of WIDTH bits in rows of ROW_WORDS words. It has
// one word-wide access port and one row-refresh port.
//
// Retention model. Each cell gets a fixed retention strength, a uniform
// random number u drawn from a hash of (address, bit, cycle of the last
// write, SEED). The cell is read wrong (its bit inverted) once the longest
// time its charge has gone without being restored exceeds its retention
// time, i.e. once BER(gap) > u, where BER(gap) is the bit-error rate of the
// 3T cell for an un-restored interval of that length:
//      gap <=   45 us : 0        (this model's choice below the printed points)
//      gap <=  767 us : 1e-5
//      gap <= 1216 us : 1e-4     (the relaxed KV refresh interval)
//      gap <= 1500 us : 4e-4     (about 0.04% at the 1.5 ms QO lifetime)
//      gap <= 1770 us : 1e-3
//      gap <= 9115 us : 1e-1
//      longer         : 0.5      (this model's choice)
// Each step takes the rate of the next printed point above it, so the
// model is pessimistic between points. Because the rate only grows with the
// gap, a bit that has failed stays failed, as in a real cell whose lost
// charge is written back by later refreshes.
//
// The longest gap of a word is worked out lazily, with per-row bookkeeping
// only. A write records its cycle for the word and, for the row, the first
// write since the row's last refresh. A refresh records its cycle and keeps
// the longest interval that written data of the row went unrefreshed: from
// the previous refresh if the row already held data then, otherwise from the
// first write since. When a word is read, its longest gap is (now - write) if
// its row has not been refreshed since the write, and otherwise the larger
// of the row's longest unrefreshed interval and the time since the row's
// last refresh. (The longest interval covers the row's whole history rather
// than only the part after this word's write; with the strictly periodic
// refresh used here the two agree.) A bank whose refresh port is never used
// therefore models a refresh-less bank.
//
// Interface and timing. acc_en/acc_we/acc_addr/acc_wdata request one access;
// read data is on acc_rdata one cycle after an accepted read and holds until
// the next read. ref_en with ref_row refreshes a whole row in one cycle and
// has priority: while ref_en is high acc_ready is low and an access presented
// in that cycle is not performed, so the requester must hold it. Refresh
// priority and the one-cycle row refresh are choices of this model.
module edram_bank #(
  parameter int unsigned WIDTH     = 9,
  parameter int unsigned WORDS     = 1048576,
  parameter int unsigned ROW_WORDS = 256,
  parameter int unsigned CLK_MHZ   = 1000,
  parameter int unsigned SEED      = 1,
  localparam int unsigned ROWS = WORDS / ROW_WORDS,
  localparam int unsigned AW   = (WORDS > 1) ? $clog2(WORDS) : 1,
  localparam int unsigned RW   = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // word access port
  input  logic             acc_en,
  input  logic             acc_we,
  input  logic [AW-1:0]    acc_addr,
  input  logic [WIDTH-1:0] acc_wdata,
  output logic             acc_ready,
  output logic [WIDTH-1:0] acc_rdata,
  // row refresh port
  input  logic             ref_en,
  input  logic [RW-1:0]    ref_row
);

  typedef longint unsigned cyc_t;

  logic [WIDTH-1:0] mem      [WORDS];  // stored value
  cyc_t             wr_cyc   [WORDS];  // cycle of the last write of each word
  cyc_t             ref_cyc  [ROWS];   // cycle of the last refresh of each row
  cyc_t             ref_gap  [ROWS];   // longest interval data spent unrefreshed
  cyc_t             row_wr1  [ROWS];   // first write since the last refresh (0: none)
  logic             row_held [ROWS];   // row held written data at its last refresh
  cyc_t             now;

  // Bit-error rate scaled to 2^32 for an un-restored interval of 'gap' cycles
  function automatic cyc_t ber_q32(cyc_t gap);
    cyc_t mhz = cyc_t'(CLK_MHZ);
    if      (gap <= 45   * mhz) return 0;
    else if (gap <= 767  * mhz) return 42950;         // 1e-5
    else if (gap <= 1216 * mhz) return 429497;        // 1e-4
    else if (gap <= 1500 * mhz) return 1717987;       // 4e-4
    else if (gap <= 1770 * mhz) return 4294967;       // 1e-3
    else if (gap <= 9115 * mhz) return 429496730;     // 1e-1
    else                        return 64'h8000_0000; // 0.5
  endfunction

  // 64-bit mixing function (splitmix64 finaliser)
  function automatic cyc_t mix64(cyc_t x);
    cyc_t z = x;
    z = (z ^ (z >> 30)) * 64'hBF58_476D_1CE4_E5B9;
    z = (z ^ (z >> 27)) * 64'h94D0_49BB_1331_11EB;
    return z ^ (z >> 31);
  endfunction

  // Longest un-restored interval of word a up to now
  function automatic cyc_t worst_gap(int unsigned a);
    logic [RW-1:0] r = RW'(a / ROW_WORDS);
    cyc_t since;
    if (ref_cyc[r] <= wr_cyc[a]) return now - wr_cyc[a];
    since = now - ref_cyc[r];
    return (since > ref_gap[r]) ? since : ref_gap[r];
  endfunction

  // Word a as the sense amplifiers see it now
  function automatic logic [WIDTH-1:0] sensed(int unsigned a);
    logic [WIDTH-1:0] v    = mem[a];
    cyc_t             rate = ber_q32(worst_gap(a));
    cyc_t             u;
    for (int unsigned b = 0; b < WIDTH; b++) begin
      u = mix64((wr_cyc[a] * 64'h9E37_79B9_7F4A_7C15) ^
                ((cyc_t'(a) << 8) | cyc_t'(b)) ^ (cyc_t'(SEED) << 40)) & 64'hFFFF_FFFF;
      if (u < rate) v[b] = ~v[b];
    end
    return v;
  endfunction

  logic [RW-1:0] acc_row;
  assign acc_row   = RW'(acc_addr / AW'(ROW_WORDS));
  assign acc_ready = !ref_en;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now       <= 64'd1;
      acc_rdata <= '0;
    end else begin
      now <= now + 64'd1;
      if (ref_en) begin
        if (row_held[ref_row] && (now - ref_cyc[ref_row] > ref_gap[ref_row]))
          ref_gap[ref_row] <= now - ref_cyc[ref_row];
        else if (!row_held[ref_row] && (row_wr1[ref_row] != 0) &&
                 (now - row_wr1[ref_row] > ref_gap[ref_row]))
          ref_gap[ref_row] <= now - row_wr1[ref_row];
        ref_cyc[ref_row]  <= now;
        row_held[ref_row] <= row_held[ref_row] || (row_wr1[ref_row] != 0);
        row_wr1[ref_row]  <= '0;
      end else if (acc_en) begin
        if (acc_we) begin
          mem[acc_addr]    <= acc_wdata;
          wr_cyc[acc_addr] <= now;
          if (row_wr1[acc_row] == 0)
            row_wr1[acc_row] <= now;
        end else begin
          acc_rdata <= sensed(int'(acc_addr));
        end
      end
    end
  end

  // Row bookkeeping starts clean: no refresh yet, no interval seen.
  initial begin
    for (int unsigned r = 0; r < ROWS; r++) begin
      ref_cyc[r]  = '0;
      ref_gap[r]  = '0;
      row_wr1[r]  = '0;
      row_held[r] = 1'b0;
    end
    assert (WORDS % ROW_WORDS == 0)
      else $error("edram_bank: WORDS must be a multiple of ROW_WORDS");
  end

endmodule
