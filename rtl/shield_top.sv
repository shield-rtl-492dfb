// shield_top: segmented, lifecycle-aware eDRAM activation workspace.
//
// The workspace stores the BF16 attention tensors of an LLM layer (Q, K, V,
// O) in three eDRAM banks with different refresh treatment:
//   - standard-refresh bank, 9 bits per word: sign + exponent of every
//     tensor, refreshed every 45 us;
//   - relaxed-refresh bank, 7 bits per word: mantissas of the persistent K
//     and V tensors (the KV cache), refreshed every 1216 us;
//   - refresh-less bank, 7 bits per word: mantissas of the transient Q and O
//     tensors, never refreshed; their contents only have to survive the
//     lifetime of one layer (about 1.5 ms at most).
// The data segment controller splits and joins the words; the lifecycle-aware
// refresh controller sweeps the two refreshed banks. This block structure,
// the field widths and the two intervals follow the published architecture.
//
// Defaults: a 2 MB workspace (1 Mi BF16 words) split evenly into a KV region
// and a QO region (the split is this implementation's choice), 256-word eDRAM
// rows, and a 1 GHz clock (also a choice), which gives one standard-bank row
// refresh every 10 cycles and one relaxed-bank row refresh every 593 cycles.
//
// Interface: the NPU-side request/response port of data_seg_ctrl (one
// request per cycle, valid/ready, read data one cycle after acceptance,
// stalled while a bank it needs is being refreshed); kv_live_rows, the
// number of relaxed-bank rows (of ROW_WORDS KV words each, from address 0
// up) that hold live KV data and so need relaxed refresh; plus one-cycle refresh
// strobes of each refreshed bank for energy accounting (*_refresh: one row
// refreshed; *_sweep: the last row of a full sweep refreshed).
module shield_top
  import shield_pkg::*;
#(
  parameter int unsigned CLK_MHZ   = CLK_MHZ_DEFAULT,
  parameter int unsigned KV_WORDS  = KV_WORDS_DEFAULT,
  parameter int unsigned QO_WORDS  = QO_WORDS_DEFAULT,
  parameter int unsigned ROW_WORDS = ROW_WORDS_DEFAULT,
  localparam int unsigned STD_WORDS = KV_WORDS + QO_WORDS,
  localparam int unsigned MAXW      = (KV_WORDS > QO_WORDS) ? KV_WORDS : QO_WORDS,
  localparam int unsigned LAW       = (MAXW > 1) ? $clog2(MAXW) : 1,
  localparam int unsigned SAW       = (STD_WORDS > 1) ? $clog2(STD_WORDS) : 1,
  localparam int unsigned KAW       = (KV_WORDS > 1) ? $clog2(KV_WORDS) : 1,
  localparam int unsigned QAW       = (QO_WORDS > 1) ? $clog2(QO_WORDS) : 1,
  localparam int unsigned STD_ROWS  = STD_WORDS / ROW_WORDS,
  localparam int unsigned REL_ROWS  = KV_WORDS / ROW_WORDS,
  localparam int unsigned SRW       = (STD_ROWS > 1) ? $clog2(STD_ROWS) : 1,
  localparam int unsigned RRW       = (REL_ROWS > 1) ? $clog2(REL_ROWS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [RRW:0]      kv_live_rows,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic              req_we,
  input  tensor_e           req_tensor,
  input  logic [LAW-1:0]    req_addr,
  input  logic [BF16_W-1:0] req_wdata,
  output logic              rsp_valid,
  output logic [BF16_W-1:0] rsp_rdata,
  output logic              std_refresh,
  output logic              rel_refresh,
  output logic              std_sweep,
  output logic              rel_sweep
);

  logic              std_en, std_we, std_ready;
  logic [SAW-1:0]    std_addr;
  logic [SE_W-1:0]   std_wdata, std_rdata;
  logic              rel_en, rel_we, rel_ready;
  logic [KAW-1:0]    rel_addr;
  logic [MANT_W-1:0] rel_wdata, rel_rdata;
  logic              rl_en, rl_we, rl_ready;
  logic [QAW-1:0]    rl_addr;
  logic [MANT_W-1:0] rl_wdata, rl_rdata;
  logic              std_ref_en, rel_ref_en;
  logic [SRW-1:0]    std_ref_row;
  logic [RRW-1:0]    rel_ref_row;

  data_seg_ctrl #(
    .KV_WORDS(KV_WORDS),
    .QO_WORDS(QO_WORDS)
  ) u_dsc (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_we, .req_tensor, .req_addr, .req_wdata,
    .rsp_valid, .rsp_rdata,
    .std_en, .std_we, .std_addr, .std_wdata, .std_ready, .std_rdata,
    .rel_en, .rel_we, .rel_addr, .rel_wdata, .rel_ready, .rel_rdata,
    .rl_en,  .rl_we,  .rl_addr,  .rl_wdata,  .rl_ready,  .rl_rdata
  );

  refresh_ctrl #(
    .CLK_MHZ (CLK_MHZ),
    .T_STD_US(T_STD_US),
    .T_REL_US(T_REL_US),
    .STD_ROWS(STD_ROWS),
    .REL_ROWS(REL_ROWS)
  ) u_rfc (
    .clk, .rst_n, .kv_live_rows,
    .std_ref_en, .std_ref_row, .std_sweep,
    .rel_ref_en, .rel_ref_row, .rel_sweep
  );

  edram_bank #(
    .WIDTH(SE_W), .WORDS(STD_WORDS), .ROW_WORDS(ROW_WORDS), .CLK_MHZ(CLK_MHZ), .SEED(1)
  ) u_std_bank (
    .clk, .rst_n,
    .acc_en(std_en), .acc_we(std_we), .acc_addr(std_addr), .acc_wdata(std_wdata),
    .acc_ready(std_ready), .acc_rdata(std_rdata),
    .ref_en(std_ref_en), .ref_row(std_ref_row)
  );

  edram_bank #(
    .WIDTH(MANT_W), .WORDS(KV_WORDS), .ROW_WORDS(ROW_WORDS), .CLK_MHZ(CLK_MHZ), .SEED(2)
  ) u_rel_bank (
    .clk, .rst_n,
    .acc_en(rel_en), .acc_we(rel_we), .acc_addr(rel_addr), .acc_wdata(rel_wdata),
    .acc_ready(rel_ready), .acc_rdata(rel_rdata),
    .ref_en(rel_ref_en), .ref_row(rel_ref_row)
  );

  // The refresh-less bank has its refresh port tied off: it is never refreshed.
  edram_bank #(
    .WIDTH(MANT_W), .WORDS(QO_WORDS), .ROW_WORDS(ROW_WORDS), .CLK_MHZ(CLK_MHZ), .SEED(3)
  ) u_rl_bank (
    .clk, .rst_n,
    .acc_en(rl_en), .acc_we(rl_we), .acc_addr(rl_addr), .acc_wdata(rl_wdata),
    .acc_ready(rl_ready), .acc_rdata(rl_rdata),
    .ref_en(1'b0), .ref_row('0)
  );

  assign std_refresh = std_ref_en;
  assign rel_refresh = rel_ref_en;

endmodule
