// tb_pcm_fw_tile: self-checking test of the PCM-FW tile.
//
// Two tiles (N=16, W=12, R=4) receive the same random sparse graph on the
// first 13 vertices, with one isolated vertex so that whole windows get
// pruned. One tile uses the 10-cycle DMA write, the other a 40-cycle write
// so that write-back stalls occur. Both results are compared with a plain
// Floyd-Warshall computed in the testbench; the rows/columns beyond n_vert
// must be untouched. The testbench also checks that every gated write
// commits exactly WR_LAT cycles after its capture.
module tb_pcm_fw_tile;
  localparam int N = 16, W = 12, R = 4, NV = 13;
  localparam logic [W-1:0] INF = {3'b000, {(W-3){1'b1}}};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic            ld_en, rd_en, start;
  logic [3:0]      ld_row, rd_row;
  logic [W-1:0]    ld_data [N];
  logic [W-1:0]    rd_data [N], rd_data2 [N];
  logic            rd_valid, rd_valid2, busy, busy2, done, done2;
  logic [31:0]     pr, fu, stl, wr, pr2, fu2, stl2, wr2;

  pcm_fw_tile #(.N(N), .W(W), .R(R), .WR_LAT(10)) dut (
    .clk, .rst_n, .ld_en, .ld_row, .ld_data, .rd_en, .rd_row, .rd_data, .rd_valid,
    .start, .n_vert(5'(NV)), .busy, .done, .n_pruned(pr), .n_futile(fu), .n_stall(stl), .n_writes(wr));
  pcm_fw_tile #(.N(N), .W(W), .R(R), .WR_LAT(40)) dut2 (
    .clk, .rst_n, .ld_en, .ld_row, .ld_data, .rd_en, .rd_row, .rd_data(rd_data2), .rd_valid(rd_valid2),
    .start, .n_vert(5'(NV)), .busy(busy2), .done(done2), .n_pruned(pr2), .n_futile(fu2), .n_stall(stl2), .n_writes(wr2));

  // write latency monitor on the 10-cycle tile
  int cap_time = -1, cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dut.wb_capture) cap_time <= cyc;
    if (dut.wb_commit) begin
      checks++;
      if (cyc - cap_time != 10) begin
        failures++; $display("FAIL: write committed %0d cycles after capture", cyc - cap_time);
      end
    end
  end

  logic [W-1:0] d [N][N];
  logic [W-1:0] ref_d [N][N];

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ld_en = 0; rd_en = 0; start = 0; ld_row = 0; rd_row = 0;
    foreach (ld_data[j]) ld_data[j] = '0;
    // random graph: vertex 5 isolated, rows/cols >= NV hold a pattern
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        if (i >= NV || j >= NV) d[i][j] = W'(i * 16 + j);
        else if (i == j) d[i][j] = 0;
        else if (i == 5 || j == 5) d[i][j] = INF;
        else if ($urandom_range(0, 99) < 25) d[i][j] = W'($urandom_range(1, 9));
        else d[i][j] = INF;
      end
    ref_d = d;
    for (int k = 0; k < NV; k++)
      for (int i = 0; i < NV; i++)
        for (int j = 0; j < NV; j++)
          if (ref_d[i][k] + ref_d[k][j] < ref_d[i][j]) ref_d[i][j] = ref_d[i][k] + ref_d[k][j];

    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int i = 0; i < N; i++) begin
      ld_en <= 1; ld_row <= 4'(i);
      for (int j = 0; j < N; j++) ld_data[j] <= d[i][j];
      @(posedge clk);
    end
    ld_en <= 0;
    @(posedge clk);
    start <= 1; @(posedge clk); start <= 0;
    wait (done && !busy); @(posedge clk);
    wait (!busy2); @(posedge clk);

    for (int i = 0; i < N; i++) begin
      rd_en <= 1; rd_row <= 4'(i); @(posedge clk); rd_en <= 0; @(posedge clk);
      for (int j = 0; j < N; j++) begin
        checks += 2;
        if (rd_data[j] !== ref_d[i][j]) begin
          failures++; $display("FAIL tile1 D[%0d][%0d]=%0d exp %0d", i, j, rd_data[j], ref_d[i][j]);
        end
        if (rd_data2[j] !== ref_d[i][j]) begin
          failures++; $display("FAIL tile2 D[%0d][%0d]=%0d exp %0d", i, j, rd_data2[j], ref_d[i][j]);
        end
      end
    end
    $display("pruned=%0d futile=%0d stalls=%0d writes=%0d | tile2 stalls=%0d", pr, fu, stl, wr, stl2);
    checks++; if (pr == 0)   begin failures++; $display("FAIL: no window pruned"); end
    checks++; if (wr == 0)   begin failures++; $display("FAIL: no write-back"); end
    checks++; if (stl != 0)  begin failures++; $display("FAIL: unexpected stall with 10-cycle writes"); end
    checks++; if (stl2 == 0) begin failures++; $display("FAIL: no stall with 40-cycle writes"); end
    checks++; if (pr2 != pr || wr2 != wr) begin failures++; $display("FAIL: tiles disagree on pruning/writes"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
