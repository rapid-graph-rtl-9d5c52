// pcm_fw_tile: a PCM-FW tile that runs Floyd-Warshall in place on one dense
// distance block of up to N vertices.
//
// Storage follows the paper's 130-unit tile (for N = 1024, W = 32, R = 32):
// each unit is a 1024 x 1024 crossbar whose wordlines are bit-planes of
// matrix rows, so one wordline holds bit b of one row across all N columns
// (bitlines are the SIMD lanes). Matrix row i lives in unit i % R at local
// slot i / R, wordlines slot*W .. slot*W+W-1. The regions are
//   Main_Block       R units   the distance matrix itself
//   Panel_Col        R units   pivot column, mirrored: row i holds D[i][k]
//                              broadcast on every bitline
//   Panel_Row        1 unit    pivot row D[k][*]
//   Temp_Add         R units   A ^ B partial of the bit-serial adder
//   Temp_Carry       1 unit    carry rows (inside felix_bitserial_alu)
//   Temp_Main_Block  R units   candidate D[i][k] + D[k][j]
// i.e. 32+1+32+1+32+32 = 130 units. The Sign_Bit row of each unit gates the
// selective write back to Main_Block.
//
// For each pivot k and each R-row window, the R units work in parallel:
// W cycles of bit-serial add (Panel_Col + Panel_Row -> Temp_Main_Block),
// W cycles of bit-serial subtract (Temp_Main_Block - Main_Block), whose
// final sum bit is the sign; entries with sign 1 (candidate smaller) in
// valid rows/columns are written. Because D[k][k] = 0 (non-negative
// weights), row k and column k do not change while k is the pivot, so the
// pivot row/column need no masking beyond excluding row k. Scheduling,
// pruning and the DMA write timing come from fw_permutation_unit.
//
// Host port (used when idle): ld_en writes matrix row ld_row (all W
// bit-planes at once); rd_en reads matrix row rd_row, data valid the next
// cycle (1-cycle DMA read). start/n_vert run FW over vertices 0..n_vert-1;
// rows and columns at and above n_vert are left untouched. done pulses
// once at the end.
//
// The region layout and the unit count are derived from the paper's figure
// and unit size; the row-to-unit interleaving (i % R) is this design's choice.
//
// Two signals are kept without a reader: the Temp_Add region stores the
// A^B partial of each add step only because the region exists in the
// tile's layout, and the ALU's carry_next output is not needed because the
// ALU holds the carry row (Temp_Carry) itself.
module pcm_fw_tile
  import rapid_pkg::*;
#(
  parameter int unsigned N      = 1024,
  parameter int unsigned W      = DIST_W,
  parameter int unsigned R      = 32,
  parameter int unsigned WR_LAT = 10
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // host row port
  input  logic                    ld_en,
  input  logic [$clog2(N)-1:0]    ld_row,
  input  logic [W-1:0]            ld_data [N],
  input  logic                    rd_en,
  input  logic [$clog2(N)-1:0]    rd_row,
  output logic [W-1:0]            rd_data [N],
  output logic                    rd_valid,
  // control
  input  logic                    start,
  input  logic [$clog2(N+1)-1:0]  n_vert,
  output logic                    busy,
  output logic                    done,
  output logic [31:0]             n_pruned,
  output logic [31:0]             n_futile,
  output logic [31:0]             n_stall,
  output logic [31:0]             n_writes
);

  localparam int unsigned S   = N / R;        // rows per unit
  localparam int unsigned WL  = S * W;        // wordlines used per unit
  localparam int unsigned SLW = $clog2(N/R+1);
  localparam int unsigned KW  = $clog2(N);
  localparam int unsigned BW  = $clog2(W);
  localparam logic [W-1:0] INF = {3'b000, {(W-3){1'b1}}};

  // ---- PCM regions (bit-plane wordlines, N bitlines each) ----
  logic [N-1:0] main_blk  [R][WL];
  logic [N-1:0] panel_col [R][WL];
  logic [N-1:0] temp_add  [R][WL];
  logic [N-1:0] temp_main [R][WL];
  logic [N-1:0] panel_row [W];
  logic [N-1:0] sign_bit  [R];
  logic [W-1:0] row_buf   [R];      // 32-row burst buffer of the pivot column

  // ---- schedule ----
  fw_state_e          st;
  logic [KW-1:0]      k;
  logic [SLW-1:0]     s, wb_s;
  logic [BW-1:0]      b;
  logic               first, pf_en, pm_en, add_en, cmp_en, wb_capture, wb_commit;
  logic               win_live, mask_any;
  logic [$clog2(N+1)-1:0] nv_q;

  fw_permutation_unit #(.N(N), .W(W), .R(R), .WR_LAT(WR_LAT)) u_perm (
    .clk, .rst_n, .start, .n_vert,
    .state(st), .pivot(k), .slot(s), .bitpos(b), .first,
    .pf_en, .pm_en, .add_en, .cmp_en, .wb_capture, .wb_commit, .wb_slot(wb_s),
    .win_live, .mask_any,
    .busy, .done, .n_pruned, .n_futile, .n_stall, .n_writes
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                nv_q <= '0;
    else if (start && !busy)   nv_q <= n_vert;
  end

  // current wordline of the window being processed
  wire [$clog2(WL)-1:0] wl = $clog2(WL)'(32'(s) * W + 32'(b));

  // lanes (columns) that belong to the active block
  logic [N-1:0] col_ok;
  always_comb
    for (int unsigned j = 0; j < N; j++) col_ok[j] = (j < 32'(nv_q));

  // row i = s*R + u is valid if below n_vert and not the pivot row
  function automatic logic row_ok(int unsigned i, int unsigned kk, int unsigned nv);
    return (i < nv) && (i != kk);
  endfunction

  // ---- bit-serial ALUs, one per unit of the window ----
  logic [N-1:0] alu_a [R];
  logic [N-1:0] alu_b [R];
  logic [N-1:0] alu_s [R];
  logic [N-1:0] alu_c [R];
  logic [N-1:0] mask_next [R];

  for (genvar u = 0; u < R; u++) begin : g_alu
    always_comb begin
      if (st == FW_CMP) begin
        alu_a[u] = temp_main[u][wl];
        alu_b[u] = main_blk[u][wl];
      end else begin
        alu_a[u] = panel_col[u][wl];
        alu_b[u] = panel_row[b];
      end
    end
    felix_bitserial_alu #(.LANES(N)) u_alu (
      .clk, .rst_n, .en(add_en || cmp_en), .first, .sub(st == FW_CMP),
      .a(alu_a[u]), .b(alu_b[u]), .sum(alu_s[u]), .carry_next(alu_c[u])
    );
    // at the last compare bit the sum bit is the sign of temp - main
    assign mask_next[u] = (row_ok(32'(s) * R + u, 32'(k), 32'(nv_q)) ? alu_s[u] : '0) & col_ok;
  end

  always_comb begin
    mask_any = 1'b0;
    for (int unsigned u = 0; u < R; u++) mask_any |= |mask_next[u];
  end

  // window liveness at the last permute bit: some valid row with finite D[i][k]
  always_comb begin
    win_live = 1'b0;
    for (int unsigned u = 0; u < R; u++) begin
      logic [W-1:0] word;
      word = row_buf[u];
      word[W-1] = main_blk[u][wl][k];
      if (row_ok(32'(s) * R + u, 32'(k), 32'(nv_q)) && word != INF) win_live = 1'b1;
    end
  end

  // ---- Main_Block: host loads and gated write-back ----
  // host rows arrive as words and are stored as W bit-planes (transpose)
  logic [N-1:0] ld_planes [W];
  logic [N-1:0] rd_planes [W];
  always_comb
    for (int unsigned bb = 0; bb < W; bb++) begin
      for (int unsigned j = 0; j < N; j++) ld_planes[bb][j] = ld_data[j][bb];
      rd_planes[bb] = main_blk[32'(rd_row) % R][(32'(rd_row) / R) * W + bb];
    end

  always_ff @(posedge clk) begin
    if (ld_en && !busy) begin
      for (int unsigned bb = 0; bb < W; bb++)
        main_blk[32'(ld_row) % R][(32'(ld_row) / R) * W + bb] <= ld_planes[bb];
    end
    if (wb_commit) begin
      for (int unsigned u = 0; u < R; u++)
        for (int unsigned bb = 0; bb < W; bb++)
          main_blk[u][32'(wb_s) * W + bb] <= (temp_main[u][32'(wb_s) * W + bb] & sign_bit[u])
                                           | (main_blk[u][32'(wb_s) * W + bb] & ~sign_bit[u]);
    end
  end

  // ---- Panel_Row, Panel_Col, row buffer (prefetch / permute) ----
  always_ff @(posedge clk) begin
    if (pf_en)
      panel_row[b] <= main_blk[32'(k) % R][(32'(k) / R) * W + 32'(b)];
    if (pm_en) begin
      for (int unsigned u = 0; u < R; u++) begin
        panel_col[u][wl] <= {N{main_blk[u][wl][k]}};
        row_buf[u][b]    <= main_blk[u][wl][k];
      end
    end
  end

  // ---- Temp_Add / Temp_Main_Block / Sign_Bit ----
  always_ff @(posedge clk) begin
    if (add_en) begin
      for (int unsigned u = 0; u < R; u++) begin
        temp_add[u][wl]  <= alu_a[u] ^ alu_b[u];
        temp_main[u][wl] <= alu_s[u];
      end
    end
    if (wb_capture)
      for (int unsigned u = 0; u < R; u++) sign_bit[u] <= mask_next[u];
  end

  // ---- host read: 1-cycle ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= rd_en && !busy;
  end
  always_ff @(posedge clk) begin
    if (rd_en && !busy)
      for (int unsigned j = 0; j < N; j++)
        for (int unsigned bb = 0; bb < W; bb++)
          rd_data[j][bb] <= rd_planes[bb][j];
  end

endmodule
