// tb_rapid_graph_top: end-to-end partitioned APSP on the compute core.
//
// A 24-vertex directed graph is split into two components of 12 vertices
// (vertices 0-11 and 12-23); in each, local vertices 0-2 are the boundary
// vertices and carry all cross edges, and vertex 11 is isolated. The
// testbench plays the host and the scratchpad and runs the four steps:
//   1 local APSP       CSR of each component -> CSR engine 0 -> FW tile, FW
//   2 boundary APSP    6-vertex boundary graph (virtual intra edges from
//                      step 1 plus cross edges) written to the FW tile, FW
//   3 injection        boundary block of each component replaced by d_B,
//                      FW again; the result must equal the global APSP
//   4 min-plus merge   for each ordered component pair: DB columns and Dout
//                      written directly, D_C2 columns (as CSR of the
//                      transpose) through CSR engine 1, one RUN_MP per source
//                      row; the result must equal the global APSP
// The reference is a plain Floyd-Warshall on the whole graph. Tile size is
// reduced (N=16, W=12, R=4, groups of 4) and the PCM write latency is 30
// cycles so that write-back stalls occur (2W < 30). Every mechanism is
// counted and must occur: CSR expansion on both engines, window pruning,
// futile-write skipping, write-back stalls, gated writes, MP updates and
// skipped MP writes, and all four command types.
module tb_rapid_graph_top;
  import rapid_pkg::*;
  localparam int N = 16, W = 12, R = 4, G = 4, WR_LAT = 30, AW = 16;
  localparam int V = 24, CS = 12, NB = 3;
  localparam logic [W-1:0] INF = {3'b000, {(W-3){1'b1}}};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid, cmd_ready, resp_done;
  cmd_t cmd;
  logic [4:0]    csr_rp_addr [2];
  logic [AW-1:0] csr_rp_data [2], csr_ed_addr [2];
  logic [3:0]    csr_ed_col [2];
  logic [W-1:0]  csr_ed_val [2];
  logic          fw_wr_en, fw_rd_en, fw_rd_valid, mp_wr_en, mp_rd_en, mp_rd_valid;
  logic [3:0]    fw_wr_row, fw_rd_row, mp_wr_idx, mp_rd_idx;
  logic [1:0]    mp_wr_sel;
  logic [W-1:0]  fw_wr_data [N], fw_rd_data [N], mp_wr_data [N], mp_rd_data [N], mp_d1_row [N];
  logic [31:0]   fw_pruned, fw_futile, fw_stalls, fw_writes, mp_updates, mp_skipped;
  logic [31:0]   csr_edges [2], n_cmds [5];

  rapid_graph_top #(.N(N), .W(W), .R(R), .GROUP(G), .WR_LAT(WR_LAT), .AW(AW)) dut (.*);

  // CSR memories of both engines, one-cycle read latency
  logic [AW-1:0] rowptr [2][N+1];
  logic [3:0]    ccol   [2][256];
  logic [W-1:0]  cval   [2][256];
  always @(posedge clk)
    for (int e = 0; e < 2; e++) begin
      csr_rp_data[e] <= rowptr[e][csr_rp_addr[e]];
      csr_ed_col[e]  <= ccol[e][csr_ed_addr[e][7:0]];
      csr_ed_val[e]  <= cval[e][csr_ed_addr[e][7:0]];
    end

  logic [W-1:0] adj [V][V], gref [V][V];
  logic [W-1:0] dloc [2][N][N], dfin [2][N][N], gb [N][N], db [N][N], row [N];

  // build CSR of a dense matrix (finite off-diagonal entries) for engine e
  task automatic build_csr(int e, logic [W-1:0] m [N][N], int rows);
    int nnz = 0;
    for (int i = 0; i <= N; i++) rowptr[e][i] = AW'(0);
    for (int i = 0; i < rows; i++) begin
      rowptr[e][i] = AW'(nnz);
      for (int j = 0; j < N; j++)
        if (i != j && m[i][j] != INF) begin ccol[e][nnz] = 4'(j); cval[e][nnz] = m[i][j]; nnz++; end
    end
    for (int i = rows; i <= N; i++) rowptr[e][i] = AW'(nnz);
  endtask

  task automatic command(cmd_op_e op, int arg, int sel = 0);
    @(negedge clk);
    cmd_valid = 1; cmd.op = op; cmd.arg = 16'(arg); cmd.sel = 2'(sel);
    do @(posedge clk); while (!cmd_ready);
    @(negedge clk); cmd_valid = 0;
    do @(posedge clk); while (!resp_done);
  endtask

  task automatic fw_write(int i, logic [W-1:0] d [N]);
    @(negedge clk); fw_wr_en = 1; fw_wr_row = 4'(i); fw_wr_data = d;
    @(negedge clk); fw_wr_en = 0;
  endtask
  task automatic fw_read(int i);
    @(negedge clk); fw_rd_en = 1; fw_rd_row = 4'(i);
    @(negedge clk); fw_rd_en = 0; row = fw_rd_data;
  endtask
  task automatic mp_write(int sel, int i, logic [W-1:0] d [N]);
    @(negedge clk); mp_wr_en = 1; mp_wr_sel = 2'(sel); mp_wr_idx = 4'(i); mp_wr_data = d;
    @(negedge clk); mp_wr_en = 0;
  endtask
  task automatic mp_read(int i);
    @(negedge clk); mp_rd_en = 1; mp_rd_idx = 4'(i);
    @(negedge clk); mp_rd_en = 0; row = mp_rd_data;
  endtask

  function automatic int gv(int c, int l); return c * CS + l; endfunction

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] m [N][N];
    logic [W-1:0] vec [N];
    cmd_valid = 0; cmd = '0; fw_wr_en = 0; fw_rd_en = 0; mp_wr_en = 0; mp_rd_en = 0;
    fw_wr_row = 0; fw_rd_row = 0; mp_wr_idx = 0; mp_rd_idx = 0; mp_wr_sel = 0;
    foreach (fw_wr_data[i]) begin fw_wr_data[i] = '0; mp_wr_data[i] = '0; mp_d1_row[i] = INF; end
    for (int e = 0; e < 2; e++) for (int x = 0; x < 256; x++) begin ccol[e][x] = '0; cval[e][x] = '0; end

    // ---- graph and global reference ----
    for (int u = 0; u < V; u++)
      for (int v = 0; v < V; v++) begin
        int cu, cv, lu, lv;
        cu = u / CS; cv = v / CS; lu = u % CS; lv = v % CS;
        adj[u][v] = INF;
        if (u == v) adj[u][v] = 0;
        else if (lu == CS - 1 || lv == CS - 1) adj[u][v] = INF;          // isolated vertex
        else if (cu == cv && $urandom_range(0, 99) < 22) adj[u][v] = W'($urandom_range(1, 9));
        else if (cu != cv && lu < NB && lv < NB && $urandom_range(0, 99) < 40) adj[u][v] = W'($urandom_range(1, 9));
      end
    gref = adj;
    for (int k = 0; k < V; k++) for (int i = 0; i < V; i++) for (int j = 0; j < V; j++)
      if (gref[i][k] + gref[k][j] < gref[i][j]) gref[i][j] = gref[i][k] + gref[k][j];

    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);

    // ---- step 1: local APSP per component ----
    for (int c = 0; c < 2; c++) begin
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++)
        m[i][j] = (i < CS && j < CS) ? adj[gv(c, i)][gv(c, j)] : INF;
      build_csr(0, m, CS);
      command(CMD_LOAD_FW, CS);
      command(CMD_RUN_FW, CS);
      for (int i = 0; i < N; i++) begin fw_read(i); for (int j = 0; j < N; j++) dloc[c][i][j] = row[j]; end
    end

    // ---- step 2: boundary graph APSP ----
    for (int a = 0; a < N; a++) for (int b = 0; b < N; b++) begin
      gb[a][b] = (a == b) ? '0 : INF;
      if (a < 2 * NB && b < 2 * NB && a != b) begin
        if (a / NB == b / NB) gb[a][b] = dloc[a / NB][a % NB][b % NB];
        else gb[a][b] = adj[gv(a / NB, a % NB)][gv(b / NB, b % NB)];
      end
    end
    for (int a = 0; a < N; a++) begin vec = gb[a]; fw_write(a, vec); end
    command(CMD_RUN_FW, 2 * NB);
    for (int a = 0; a < N; a++) begin fw_read(a); for (int b = 0; b < N; b++) db[a][b] = row[b]; end
    for (int a = 0; a < 2 * NB; a++) for (int b = 0; b < 2 * NB; b++) begin
      checks++;
      if (db[a][b] !== gref[gv(a / NB, a % NB)][gv(b / NB, b % NB)]) begin
        failures++; $display("FAIL: d_B[%0d][%0d]=%0d exp %0d (gb %0d)", a, b, db[a][b], gref[gv(a / NB, a % NB)][gv(b / NB, b % NB)], gb[a][b]);
      end
    end

    // ---- step 3: boundary injection and FW re-run ----
    for (int c = 0; c < 2; c++) begin
      for (int i = 0; i < N; i++) begin
        for (int j = 0; j < N; j++) vec[j] = (i < NB && j < NB) ? db[c * NB + i][c * NB + j] : dloc[c][i][j];
        fw_write(i, vec);
      end
      command(CMD_RUN_FW, CS);
      for (int i = 0; i < N; i++) begin fw_read(i); for (int j = 0; j < N; j++) dfin[c][i][j] = row[j]; end
      for (int i = 0; i < CS; i++) for (int j = 0; j < CS; j++) begin
        checks++;
        if (dfin[c][i][j] !== gref[gv(c, i)][gv(c, j)]) begin
          failures++; $display("FAIL: intra C%0d [%0d][%0d]=%0d exp %0d", c, i, j, dfin[c][i][j], gref[gv(c, i)][gv(c, j)]);
        end
      end
    end

    // ---- step 4: cross-component min-plus merge ----
    for (int c1 = 0; c1 < 2; c1++) begin
      int c2;
      c2 = 1 - c1;
      for (int j = 0; j < N; j++) begin                        // DB columns, lanes i
        for (int i = 0; i < N; i++) vec[i] = (i < NB && j < NB) ? db[c1 * NB + i][c2 * NB + j] : INF;
        mp_write(0, j, vec);
      end
      for (int n = 0; n < N; n++) for (int j = 0; j < N; j++)  // transpose of D_C2 restricted to boundary rows
        m[n][j] = (j < NB && n < CS) ? dfin[c2][j][n] : INF;
      build_csr(1, m, N);
      command(CMD_LOAD_MP, N, 1);
      for (int i = 0; i < N; i++) vec[i] = INF;
      for (int r = 0; r < N; r++) mp_write(2, r, vec);
      for (int mm = 0; mm < CS; mm++) begin
        for (int i = 0; i < N; i++) mp_d1_row[i] = (i < NB) ? dfin[c1][mm][i] : INF;
        command(CMD_RUN_MP, mm);
      end
      for (int mm = 0; mm < CS; mm++) begin
        mp_read(mm);
        for (int n = 0; n < CS; n++) begin
          checks++;
          if (row[n] !== gref[gv(c1, mm)][gv(c2, n)]) begin
            failures++; $display("FAIL: cross C%0d[%0d] -> C%0d[%0d] = %0d exp %0d", c1, mm, c2, n, row[n], gref[gv(c1, mm)][gv(c2, n)]);
          end
        end
      end
    end

    // ---- mechanisms ----
    $display("csr edges %0d/%0d, FW pruned %0d futile %0d stalls %0d writes %0d, MP updates %0d skipped %0d, cmds %0d %0d %0d %0d",
             csr_edges[0], csr_edges[1], fw_pruned, fw_futile, fw_stalls, fw_writes, mp_updates, mp_skipped,
             n_cmds[1], n_cmds[2], n_cmds[3], n_cmds[4]);
    checks += 9;
    if (csr_edges[0] == 0) begin failures++; $display("FAIL: engine 0 expanded nothing"); end
    if (csr_edges[1] == 0) begin failures++; $display("FAIL: engine 1 expanded nothing"); end
    if (fw_pruned == 0)    begin failures++; $display("FAIL: no pruned window"); end
    if (fw_futile == 0)    begin failures++; $display("FAIL: no futile write skipped"); end
    if (fw_stalls == 0)    begin failures++; $display("FAIL: no write-back stall"); end
    if (fw_writes == 0)    begin failures++; $display("FAIL: no gated write"); end
    if (mp_updates == 0)   begin failures++; $display("FAIL: no MP update"); end
    if (mp_skipped == 0)   begin failures++; $display("FAIL: no skipped MP write"); end
    if (n_cmds[1] == 0 || n_cmds[2] == 0 || n_cmds[3] == 0 || n_cmds[4] == 0) begin
      failures++; $display("FAIL: a command type never ran");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
