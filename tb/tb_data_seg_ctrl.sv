// tb_data_seg_ctrl: self-checking test of the data segment controller.
//
// The controller (KV region 16 words, QO region 8 words) is connected to
// three simple one-cycle-latency bank models kept in the testbench, whose
// ready lines drop at random to imitate refreshes. Random reads and writes of
// all four tensors are issued, each held until accepted. The test checks:
//   - every read returns the last word written to that tensor region address;
//   - read data arrives exactly one cycle after acceptance;
//   - sign+exponent land in the standard bank (QO region above the KV region),
//     KV mantissas only in the relaxed bank, QO mantissas only in the
//     refresh-less bank;
//   - a request is accepted only when the banks it needs are ready, and
//     a busy bank that the request does not need does not stall it.
module tb_data_seg_ctrl;
  import shield_pkg::*;
  localparam int unsigned KV = 16, QO = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        req_valid = 1'b0, req_ready, req_we = 1'b0;
  tensor_e     req_tensor = TENSOR_Q;
  logic [3:0]  req_addr = '0;
  logic [15:0] req_wdata = '0;
  logic        rsp_valid;
  logic [15:0] rsp_rdata;
  logic        std_en, std_we, std_ready;
  logic [4:0]  std_addr;
  logic [8:0]  std_wdata, std_rdata;
  logic        rel_en, rel_we, rel_ready;
  logic [3:0]  rel_addr;
  logic [6:0]  rel_wdata, rel_rdata;
  logic        rl_en, rl_we, rl_ready;
  logic [2:0]  rl_addr;
  logic [6:0]  rl_wdata, rl_rdata;

  data_seg_ctrl #(.KV_WORDS(KV), .QO_WORDS(QO)) dut (.*);

  // bank models
  logic [8:0] std_mem [KV + QO];
  logic [6:0] rel_mem [KV];
  logic [6:0] rl_mem  [QO];
  always_ff @(posedge clk) begin
    if (std_en) begin
      if (std_we) std_mem[std_addr] <= std_wdata; else std_rdata <= std_mem[std_addr];
    end
    if (rel_en) begin
      if (rel_we) rel_mem[rel_addr] <= rel_wdata; else rel_rdata <= rel_mem[rel_addr];
    end
    if (rl_en) begin
      if (rl_we) rl_mem[rl_addr] <= rl_wdata; else rl_rdata <= rl_mem[rl_addr];
    end
  end

  // random busy (refresh) windows
  always_ff @(posedge clk) begin
    std_ready <= ($urandom_range(0, 3) != 0);
    rel_ready <= ($urandom_range(0, 2) != 0);
    rl_ready  <= ($urandom_range(0, 4) != 0);
  end

  int checks = 0, failures = 0;
  int stalls = 0, reads = 0, writes = 0, bypass_ok = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  logic [15:0] ref_kv [KV];
  logic [15:0] ref_qo [QO];
  logic        exp_rsp = 1'b0;
  logic [15:0] exp_data;

  // response checker
  always @(posedge clk) if (rst_n) begin
    check(rsp_valid == exp_rsp, "rsp_valid exactly one cycle after an accepted read");
    if (rsp_valid && exp_rsp)
      check(rsp_rdata == exp_data, $sformatf("read data %h, expected %h", rsp_rdata, exp_data));
  end

  // stall / routing checker, sampled in the middle of the low phase
  always @(negedge clk) if (rst_n && req_valid) begin
    automatic logic kv = (req_tensor == TENSOR_K) || (req_tensor == TENSOR_V);
    automatic logic need = std_ready && (kv ? rel_ready : rl_ready);
    check(req_ready == need, "req_ready follows the readiness of the banks needed");
    if (need && !(kv ? rl_ready : rel_ready)) bypass_ok++;
    if (req_ready) begin
      check(std_en && (rel_en == kv) && (rl_en == !kv), "bank enables steered by lifecycle");
      check(std_addr == (kv ? 5'(req_addr) : 5'(KV + req_addr)), "standard bank address map");
      if (req_we) begin
        check(std_wdata == req_wdata[15:7], "sign+exponent to the standard bank");
        check((kv ? rel_wdata : rl_wdata) == req_wdata[6:0], "mantissa to its bank");
      end
    end else begin
      check(!std_en && !rel_en && !rl_en, "no bank enabled while stalled");
      stalls++;
    end
  end

  task automatic issue(input bit we, input tensor_e t, input int a, input logic [15:0] d);
    @(negedge clk);
    req_valid = 1'b1; req_we = we; req_tensor = t; req_addr = 4'(a); req_wdata = d;
    #1;
    while (!req_ready) begin
      @(negedge clk);
      #1;
    end
    @(posedge clk);
    exp_rsp  <= !we;
    if (!we) exp_data <= ((t == TENSOR_K) || (t == TENSOR_V)) ? ref_kv[a] : ref_qo[a];
    if (we) begin
      if ((t == TENSOR_K) || (t == TENSOR_V)) ref_kv[a] = d; else ref_qo[a] = d;
      writes++;
    end else reads++;
    #1 req_valid = 1'b0;
  endtask

  always @(posedge clk) if (!(req_valid && req_ready && !req_we)) exp_rsp <= 1'b0;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // fill both regions
    for (int a = 0; a < KV; a++) issue(1'b1, (a % 2) ? TENSOR_V : TENSOR_K, a, 16'($urandom));
    for (int a = 0; a < QO; a++) issue(1'b1, (a % 2) ? TENSOR_O : TENSOR_Q, a, 16'($urandom));
    // direct look at the banks
    for (int a = 0; a < KV; a++) begin
      check(std_mem[a] == ref_kv[a][15:7], $sformatf("KV sign+exp word %0d in std bank", a));
      check(rel_mem[a] == ref_kv[a][6:0], $sformatf("KV mantissa word %0d in relaxed bank", a));
    end
    for (int a = 0; a < QO; a++) begin
      check(std_mem[KV + a] == ref_qo[a][15:7], $sformatf("QO sign+exp word %0d in std bank", a));
      check(rl_mem[a] == ref_qo[a][6:0], $sformatf("QO mantissa word %0d in refresh-less bank", a));
    end
    // random traffic
    for (int i = 0; i < 2000; i++) begin
      automatic tensor_e t = tensor_e'($urandom_range(0, 3));
      automatic bit kv = (t == TENSOR_K) || (t == TENSOR_V);
      automatic int a = kv ? $urandom_range(0, KV - 1) : $urandom_range(0, QO - 1);
      issue($urandom_range(0, 1) == 1, t, a, 16'($urandom));
      if ($urandom_range(0, 3) == 0) @(negedge clk);
    end
    repeat (3) @(negedge clk);
    check(stalls > 0, $sformatf("stalls seen: %0d", stalls));
    check(bypass_ok > 0, $sformatf("accepted while the unused mantissa bank was busy: %0d", bypass_ok));
    check(reads > 500 && writes > 500, "enough reads and writes");
    $display("INFO: reads=%0d writes=%0d stalls=%0d", reads, writes, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
