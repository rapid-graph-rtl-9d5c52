// tb_pcm_mp_tile: self-checking test of the PCM-MP tile (N=16, W=12, R=4,
// tree groups of 4). Random D_C1 rows, DB and D_C2 (with some INF entries)
// are merged into Dout and compared with a direct triple-loop min-plus
// product computed here. Row 3 starts from all-zero Dout entries, so its
// compare-and-swap finds nothing smaller and the write must be skipped.
// The cycle count from start to done is checked against the schedule
//   1 + 2*(N/R)*W + 2*(N + L) + W + WR_LAT + 2,  L = tree latency
// (start cycle, two add passes, two tree passes, compare, PCM write, DONE
// state and the registered done pulse; WR_LAT is absent when skipped).
module tb_pcm_mp_tile;
  localparam int N = 16, W = 12, R = 4, G = 4, WR_LAT = 10;
  localparam int L = $clog2(N) + 3;
  localparam logic [W-1:0] INF = {3'b000, {(W-3){1'b1}}};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic         wr_en, rd_en, start, rd_valid, busy, done;
  logic [1:0]   wr_sel;
  logic [3:0]   wr_idx, rd_idx, m;
  logic [W-1:0] wr_data [N], rd_data [N], d1_row [N];
  logic [31:0]  n_upd, n_skip;

  pcm_mp_tile #(.N(N), .W(W), .R(R), .GROUP(G), .WR_LAT(WR_LAT)) dut (
    .clk, .rst_n, .wr_en, .wr_sel, .wr_idx, .wr_data, .rd_en, .rd_idx, .rd_data, .rd_valid,
    .start, .m, .d1_row, .busy, .done, .n_updates(n_upd), .n_skipped(n_skip));

  logic [W-1:0] d1 [N][N], db [N][N], d2 [N][N], dout [N][N], ref_o [N][N];

  function automatic logic [W-1:0] rnd();
    return ($urandom_range(0, 99) < 30) ? INF : W'($urandom_range(0, 60));
  endfunction

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_row(int mm);
    int t0, t1, exp_cyc;
    logic [W-1:0] best;
    start <= 1; m <= 4'(mm);
    for (int i = 0; i < N; i++) d1_row[i] <= d1[mm][i];
    @(posedge clk); t0 = $time; start <= 0;
    do @(posedge clk); while (!done);
    t1 = $time;
    exp_cyc = 1 + 2 * (N / R) * W + 2 * (N + L) + W + ((mm == 3) ? 0 : WR_LAT) + 2;
    checks++;
    if ((t1 - t0) / 10 + 1 != exp_cyc) begin
      failures++; $display("FAIL: row %0d took %0d cycles, expected %0d", mm, (t1 - t0) / 10 + 1, exp_cyc);
    end
    for (int n = 0; n < N; n++) begin
      best = dout[mm][n];
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++)
          if (d1[mm][i] + db[i][j] + d2[j][n] < best) best = d1[mm][i] + db[i][j] + d2[j][n];
      ref_o[mm][n] = best;
    end
    rd_en <= 1; rd_idx <= 4'(mm); @(posedge clk); rd_en <= 0; @(posedge clk);
    for (int n = 0; n < N; n++) begin
      checks++;
      if (rd_data[n] !== ref_o[mm][n]) begin
        failures++; $display("FAIL: Dout[%0d][%0d]=%0d exp %0d", mm, n, rd_data[n], ref_o[mm][n]);
      end
    end
  endtask

  initial begin
    wr_en = 0; rd_en = 0; start = 0; wr_sel = 0; wr_idx = 0; rd_idx = 0; m = 0;
    foreach (wr_data[i]) wr_data[i] = '0;
    foreach (d1_row[i]) d1_row[i] = '0;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        d1[i][j] = rnd(); db[i][j] = rnd(); d2[i][j] = rnd();
        dout[i][j] = (i == 3) ? '0 : (($urandom_range(0, 1) == 1) ? INF : W'($urandom_range(40, 200)));
      end
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int v = 0; v < N; v++) begin
      wr_en <= 1; wr_idx <= 4'(v);
      wr_sel <= 0; for (int i = 0; i < N; i++) wr_data[i] <= db[i][v]; @(posedge clk);
      wr_sel <= 1; for (int i = 0; i < N; i++) wr_data[i] <= d2[i][v]; @(posedge clk);
      wr_sel <= 2; for (int i = 0; i < N; i++) wr_data[i] <= dout[v][i]; @(posedge clk);
    end
    wr_en <= 0; @(posedge clk);
    run_row(0);
    run_row(3);
    run_row(7);
    run_row(15);
    $display("updates=%0d skipped=%0d", n_upd, n_skip);
    checks++; if (n_skip != 1) begin failures++; $display("FAIL: expected exactly one skipped write"); end
    checks++; if (n_upd == 0)  begin failures++; $display("FAIL: no entry updated"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
