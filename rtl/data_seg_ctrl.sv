// data_seg_ctrl: data segment controller of the segmented eDRAM workspace.
//
// Every BF16 activation word is stored in two pieces. Its sign and exponent
// (bits [15:7]) go to the standard-refresh bank whatever tensor it belongs to.
// Its 7-bit mantissa (bits [6:0]) goes to the relaxed-refresh bank when the
// word belongs to a persistent tensor (K or V) and to the refresh-less bank
// when it belongs to a transient tensor (Q or O). A read fetches both pieces
// in the same cycle and joins them again. This field split and the mapping by
// tensor lifecycle follow the published architecture.
//
// Address map (this implementation's choice). A request names its tensor and
// a word address inside that tensor's lifecycle region: the KV region holds
// KV_WORDS words and the QO region QO_WORDS words. The standard bank is
// KV_WORDS + QO_WORDS deep, with the KV region first and the QO region above
// it; the relaxed bank is KV_WORDS deep and the refresh-less bank QO_WORDS
// deep, each indexed directly by the region address. How K and V (or Q and O)
// share their region is left to software.
//
// Handshake. req_valid/req_ready: a request is accepted in a cycle where both
// are high. req_ready is low while either bank the request needs is busy
// with a refresh (the banks give refresh priority), so the request stalls
// until both are free; the refresh-less bank is never busy. Read data comes
// back on rsp_rdata with rsp_valid exactly one cycle after the read is
// accepted; writes give no response. One request per cycle at most.
module data_seg_ctrl
  import shield_pkg::*;
#(
  parameter int unsigned KV_WORDS = KV_WORDS_DEFAULT,
  parameter int unsigned QO_WORDS = QO_WORDS_DEFAULT,
  localparam int unsigned STD_WORDS = KV_WORDS + QO_WORDS,
  localparam int unsigned MAXW      = (KV_WORDS > QO_WORDS) ? KV_WORDS : QO_WORDS,
  localparam int unsigned LAW       = (MAXW > 1) ? $clog2(MAXW) : 1,
  localparam int unsigned SAW       = (STD_WORDS > 1) ? $clog2(STD_WORDS) : 1,
  localparam int unsigned KAW       = (KV_WORDS > 1) ? $clog2(KV_WORDS) : 1,
  localparam int unsigned QAW       = (QO_WORDS > 1) ? $clog2(QO_WORDS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // NPU side
  input  logic              req_valid,
  output logic              req_ready,
  input  logic              req_we,
  input  tensor_e           req_tensor,
  input  logic [LAW-1:0]    req_addr,
  input  logic [BF16_W-1:0] req_wdata,
  output logic              rsp_valid,
  output logic [BF16_W-1:0] rsp_rdata,
  // standard-refresh bank (sign + exponent)
  output logic              std_en,
  output logic              std_we,
  output logic [SAW-1:0]    std_addr,
  output logic [SE_W-1:0]   std_wdata,
  input  logic              std_ready,
  input  logic [SE_W-1:0]   std_rdata,
  // relaxed-refresh bank (KV mantissa)
  output logic              rel_en,
  output logic              rel_we,
  output logic [KAW-1:0]    rel_addr,
  output logic [MANT_W-1:0] rel_wdata,
  input  logic              rel_ready,
  input  logic [MANT_W-1:0] rel_rdata,
  // refresh-less bank (QO mantissa)
  output logic              rl_en,
  output logic              rl_we,
  output logic [QAW-1:0]    rl_addr,
  output logic [MANT_W-1:0] rl_wdata,
  input  logic              rl_ready,
  input  logic [MANT_W-1:0] rl_rdata
);

  logic persistent;
  logic accept;
  logic rd_kv_q;

  assign persistent = is_persistent(req_tensor);
  assign req_ready  = std_ready && (persistent ? rel_ready : rl_ready);
  assign accept     = req_valid && req_ready;

  // sign + exponent segment
  assign std_en    = accept;
  assign std_we    = req_we;
  assign std_addr  = persistent ? SAW'(req_addr) : SAW'(KV_WORDS) + SAW'(req_addr);
  assign std_wdata = req_wdata[BF16_W-1:MANT_W];

  // mantissa segment, steered by lifecycle
  assign rel_en    = accept && persistent;
  assign rel_we    = req_we;
  assign rel_addr  = KAW'(req_addr);
  assign rel_wdata = req_wdata[MANT_W-1:0];

  assign rl_en     = accept && !persistent;
  assign rl_we     = req_we;
  assign rl_addr   = QAW'(req_addr);
  assign rl_wdata  = req_wdata[MANT_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp_valid <= 1'b0;
      rd_kv_q   <= 1'b0;
    end else begin
      rsp_valid <= accept && !req_we;
      if (accept && !req_we) rd_kv_q <= persistent;
    end
  end

  assign rsp_rdata = {std_rdata, rd_kv_q ? rel_rdata : rl_rdata};

  // Request must stay inside its lifecycle region and be held while stalled
  a_addr_in_region: assert property (@(posedge clk) disable iff (!rst_n)
    req_valid |-> (persistent ? (int'(req_addr) < KV_WORDS) : (int'(req_addr) < QO_WORDS)));
  a_hold_when_stalled: assert property (@(posedge clk) disable iff (!rst_n)
    (req_valid && !req_ready) |=> (req_valid && $stable(req_addr) && $stable(req_tensor)
                                   && $stable(req_we)));

endmodule
