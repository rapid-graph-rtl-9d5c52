// tb_fw_permutation_unit: the FW scheduling FSM on its own (N=16, W=4, R=4,
// 10-cycle DMA write, 10 active vertices = 3 windows). The testbench plays
// the tile: window liveness and "mask non-zero" follow fixed patterns of
// (pivot, window). It checks, per pivot, W prefetch cycles and W permute
// cycles per window, W add cycles per live window and none for a pruned
// one, a write of exactly WR_LAT cycles for every non-zero mask, no write
// overlap, no prefetch while a write is pending, the pruned / futile /
// write counters, and that stalls occur (2W < WR_LAT here).
module tb_fw_permutation_unit;
  import rapid_pkg::*;
  localparam int N = 16, W = 4, R = 4, WR_LAT = 10, NV = 10, NWIN = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, first, pf_en, pm_en, add_en, cmp_en, wb_capture, wb_commit, win_live, mask_any, busy, done;
  fw_state_e st;
  logic [3:0] pivot;
  logic [2:0] slot, wb_slot;
  logic [1:0] bitpos;
  logic [31:0] n_pruned, n_futile, n_stall, n_writes;

  fw_permutation_unit #(.N(N), .W(W), .R(R), .WR_LAT(WR_LAT)) dut (
    .clk, .rst_n, .start, .n_vert(5'(NV)), .state(st), .pivot, .slot, .bitpos, .first,
    .pf_en, .pm_en, .add_en, .cmp_en, .wb_capture, .wb_commit, .wb_slot,
    .win_live, .mask_any, .busy, .done, .n_pruned, .n_futile, .n_stall, .n_writes);

  function automatic bit live_f(int k, int s);  return ((k + s) % 3) != 0; endfunction
  function automatic bit mask_f(int k, int s);  return ((k * 7 + s) % 4) != 0; endfunction

  assign win_live = live_f(int'(pivot), int'(slot));
  assign mask_any = mask_f(int'(pivot), int'(slot));

  int pf_cnt [NV], pm_cnt [NV], add_cnt [NV];
  int cyc = 0, cap_cyc = -1, pending = 0, done_cnt = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (pf_en)  begin pf_cnt[pivot]++;
        checks++; if (pending) begin failures++; $display("FAIL: prefetch with write pending"); end
      end
      if (pm_en)  pm_cnt[pivot]++;
      if (add_en) add_cnt[pivot]++;
      if (wb_capture && mask_any) begin
        checks++; if (pending) begin failures++; $display("FAIL: overlapping writes"); end
        pending = 1; cap_cyc = cyc;
      end
      if (wb_commit) begin
        checks++;
        if (cyc - cap_cyc != WR_LAT) begin failures++; $display("FAIL: write took %0d", cyc - cap_cyc); end
        pending = 0;
      end
      if (done) done_cnt++;
    end
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_pruned = 0, exp_futile = 0, exp_writes = 0;
    start = 0;
    foreach (pf_cnt[k]) begin pf_cnt[k] = 0; pm_cnt[k] = 0; add_cnt[k] = 0; end
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    wait (done); @(posedge clk); @(posedge clk);
    for (int k = 0; k < NV; k++) begin
      int live_n;
      live_n = 0;
      for (int s = 0; s < NWIN; s++) begin
        if (!live_f(k, s)) exp_pruned++;
        else begin
          live_n++;
          if (mask_f(k, s)) exp_writes++; else exp_futile++;
        end
      end
      checks += 3;
      if (pf_cnt[k] != W)        begin failures++; $display("FAIL: pivot %0d prefetch %0d", k, pf_cnt[k]); end
      if (pm_cnt[k] != NWIN * W) begin failures++; $display("FAIL: pivot %0d permute %0d", k, pm_cnt[k]); end
      if (add_cnt[k] != live_n * W) begin failures++; $display("FAIL: pivot %0d add %0d exp %0d", k, add_cnt[k], live_n * W); end
    end
    $display("pruned=%0d futile=%0d writes=%0d stalls=%0d", n_pruned, n_futile, n_writes, n_stall);
    checks += 5;
    if (n_pruned != 32'(exp_pruned)) begin failures++; $display("FAIL: pruned %0d exp %0d", n_pruned, exp_pruned); end
    if (n_futile != 32'(exp_futile)) begin failures++; $display("FAIL: futile %0d exp %0d", n_futile, exp_futile); end
    if (n_writes != 32'(exp_writes)) begin failures++; $display("FAIL: writes %0d exp %0d", n_writes, exp_writes); end
    if (n_stall == 0)  begin failures++; $display("FAIL: no stall"); end
    if (done_cnt != 1) begin failures++; $display("FAIL: done pulses %0d", done_cnt); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
