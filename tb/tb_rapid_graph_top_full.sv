// tb_rapid_graph_top_full: the compute core at its default size (1024-vertex
// tiles, 32-bit distances, 32-unit slabs, 1024-input comparator tree,
// 10-cycle PCM writes), taken through one complete operation of each tile:
//   - all 1024 rows of a CSR matrix are expanded by stream engine 0 into the
//     FW tile; the first NV rows hold a random sparse graph (about 3
//     out-edges per vertex, some isolated vertices), the rest are empty.
//     Floyd-Warshall runs over vertices 0..NV-1, and all 1024 x 1024 entries
//     are compared with a Floyd-Warshall computed here (entries outside the
//     active block must stay as loaded);
//   - the result is then used as D_C1, DB and D_C2 of a full-width min-plus
//     merge for source row 5 (DB and D_C2 columns and the INF Dout row
//     written directly), checked against a two-stage reference.
// The cycle counts of both operations are printed. FW over NV = 256
// vertices keeps the run within a few minutes of simulation: every cycle
// evaluates the full 1024-lane datapath, and an FW over all 1024 pivots
// takes about 3.2 million cycles.
module tb_rapid_graph_top_full;
  import rapid_pkg::*;
  localparam int N = 1024, W = 32;
  localparam int NV = 256;   // vertices of the test graph (FW pivots)
  localparam logic [W-1:0] INF = DIST_INF;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid, cmd_ready, resp_done;
  cmd_t cmd;
  logic [10:0]   csr_rp_addr [2];
  logic [31:0]   csr_rp_data [2], csr_ed_addr [2];
  logic [9:0]    csr_ed_col [2];
  logic [W-1:0]  csr_ed_val [2];
  logic          fw_wr_en, fw_rd_en, fw_rd_valid, mp_wr_en, mp_rd_en, mp_rd_valid;
  logic [9:0]    fw_wr_row, fw_rd_row, mp_wr_idx, mp_rd_idx;
  logic [1:0]    mp_wr_sel;
  logic [W-1:0]  fw_wr_data [N], fw_rd_data [N], mp_wr_data [N], mp_rd_data [N], mp_d1_row [N];
  logic [31:0]   fw_pruned, fw_futile, fw_stalls, fw_writes, mp_updates, mp_skipped;
  logic [31:0]   csr_edges [2], n_cmds [5];

  rapid_graph_top dut (.*);

  localparam int MAXE = 4 * N;
  logic [31:0]  rowptr [N+1];
  logic [9:0]   ccol [MAXE];
  logic [W-1:0] cval [MAXE];
  always @(posedge clk) begin
    csr_rp_data[0] <= rowptr[csr_rp_addr[0]];
    csr_ed_col[0]  <= ccol[csr_ed_addr[0][$clog2(MAXE)-1:0]];
    csr_ed_val[0]  <= cval[csr_ed_addr[0][$clog2(MAXE)-1:0]];
    csr_rp_data[1] <= '0; csr_ed_col[1] <= '0; csr_ed_val[1] <= '0;
  end

  logic [W-1:0] d [N][N];
  logic [W-1:0] tm1 [N];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic command(cmd_op_e op, int arg, int sel = 0);
    @(negedge clk);
    cmd_valid = 1; cmd.op = op; cmd.arg = 16'(arg); cmd.sel = 2'(sel);
    do @(posedge clk); while (!cmd_ready);
    @(negedge clk); cmd_valid = 0;
    do @(posedge clk); while (!resp_done);
  endtask

  initial begin : watchdog
    repeat (20_000_000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nnz, t0;
    logic [W-1:0] best;
    cmd_valid = 0; cmd = '0; fw_wr_en = 0; fw_rd_en = 0; mp_wr_en = 0; mp_rd_en = 0;
    fw_wr_row = 0; fw_rd_row = 0; mp_wr_idx = 0; mp_rd_idx = 0; mp_wr_sel = 0;
    foreach (fw_wr_data[i]) begin fw_wr_data[i] = '0; mp_wr_data[i] = '0; mp_d1_row[i] = INF; end

    // random graph in CSR and dense form
    nnz = 0;
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j < N; j++) d[i][j] = (i == j) ? '0 : INF;
      rowptr[i] = 32'(nnz);
      if (i < NV && i % 61 != 7) begin
        for (int e = 0; e < 3; e++) begin
          int c;
          c = $urandom_range(0, NV - 1);
          if (c % 61 == 7) c = (c + 1) % NV;
          ccol[nnz] = 10'(c); cval[nnz] = W'($urandom_range(1, 1000)); 
          if (c != i && cval[nnz] < d[i][c]) d[i][c] = cval[nnz];
          nnz++;
        end
      end
    end
    rowptr[N] = 32'(nnz);
    for (int k = 0; k < NV; k++)
      for (int i = 0; i < NV; i++)
        if (d[i][k] != INF)
          for (int j = 0; j < N; j++)
            if (d[i][k] + d[k][j] < d[i][j]) d[i][j] = d[i][k] + d[k][j];

    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    command(CMD_LOAD_FW, N);
    t0 = cyc;
    command(CMD_RUN_FW, NV);
    $display("FW over %0d vertices: %0d cycles, pruned %0d futile %0d writes %0d stalls %0d",
             NV, cyc - t0, fw_pruned, fw_futile, fw_writes, fw_stalls);
    for (int i = 0; i < N; i++) begin
      @(negedge clk); fw_rd_en = 1; fw_rd_row = 10'(i);
      @(negedge clk); fw_rd_en = 0;
      for (int j = 0; j < N; j++) begin
        checks++;
        if (fw_rd_data[j] !== d[i][j]) begin
          failures++;
          if (failures < 10) $display("FAIL: D[%0d][%0d]=%0d exp %0d", i, j, fw_rd_data[j], d[i][j]);
        end
      end
    end

    // min-plus merge of row 5 with DB = D_C2 = D
    for (int v = 0; v < N; v++) begin
      @(negedge clk); mp_wr_en = 1; mp_wr_idx = 10'(v);
      mp_wr_sel = 0; for (int i = 0; i < N; i++) mp_wr_data[i] = d[i][v];
      @(negedge clk); mp_wr_sel = 1;
      @(negedge clk); mp_wr_sel = 2; for (int i = 0; i < N; i++) mp_wr_data[i] = INF;
    end
    @(negedge clk); mp_wr_en = 0;
    for (int i = 0; i < N; i++) mp_d1_row[i] = d[5][i];
    t0 = cyc;
    command(CMD_RUN_MP, 5);
    $display("MP row: %0d cycles, updates %0d", cyc - t0, mp_updates);
    for (int j = 0; j < N; j++) begin
      tm1[j] = INF * 3;
      for (int i = 0; i < N; i++) if (d[5][i] + d[i][j] < tm1[j]) tm1[j] = d[5][i] + d[i][j];
    end
    @(negedge clk); mp_rd_en = 1; mp_rd_idx = 10'd5;
    @(negedge clk); mp_rd_en = 0;
    for (int n = 0; n < N; n++) begin
      best = INF;
      for (int j = 0; j < N; j++) if (tm1[j] + d[j][n] < best) best = tm1[j] + d[j][n];
      checks++;
      if (mp_rd_data[n] !== best) begin
        failures++;
        if (failures < 10) $display("FAIL: Dout[5][%0d]=%0d exp %0d", n, mp_rd_data[n], best);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
