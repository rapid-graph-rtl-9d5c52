// rapid_graph_top: the compute core of RAPID-Graph, i.e. the logic base
// die's control and CSR expansion together with one PCM-FW tile and one
// PCM-MP tile.
//
//   host command --> main_controller --+--> csr_stream_engine 0 --> PCM-FW tile
//                                      +--> csr_stream_engine 1 --> PCM-MP tile
//                                      +--> FW tile start / MP tile start
//
// The FW tile runs Floyd-Warshall in place on a dense block of up to N
// vertices (local APSP, boundary-graph APSP and the re-run after boundary
// injection are all this same kernel). The MP tile runs the cross-component
// min-plus merge row by row. The memories the paper puts around the core
// (HBM3 scratchpad, FeNAND storage) and the die-to-die links (UCIe, ONFI)
// are outside this module: the CSR read ports and the direct row ports of
// both tiles are where they connect. A host (or the HBM-side DMA) uses the
// direct row ports to read FW results and to inject boundary distances.
//
// A real die holds many tiles that run concurrently under the main
// controller; this top has one tile of each kind, which is the unit of
// replication. Direct host row writes are ignored while a CSR engine is
// delivering a row to the same tile.
//
// The busy flags of the engines and tiles are not used here: the main
// controller tracks each operation by its done pulse. The assertions inside
// the sub-blocks sample rst_n synchronously (disable iff) while the flops
// reset asynchronously on it; the assertion use adds no logic.
module rapid_graph_top
  import rapid_pkg::*;
#(
  parameter int unsigned N      = 1024,
  parameter int unsigned W      = DIST_W,
  parameter int unsigned R      = 32,
  parameter int unsigned GROUP  = 32,
  parameter int unsigned WR_LAT = 10,
  parameter int unsigned AW     = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // host command interface
  input  logic                    cmd_valid,
  output logic                    cmd_ready,
  input  cmd_t                    cmd,
  output logic                    resp_done,
  // CSR memories (synchronous, 1-cycle read) for engine 0 and engine 1
  output logic [$clog2(N+1)-1:0]  csr_rp_addr [2],
  input  logic [AW-1:0]           csr_rp_data [2],
  output logic [AW-1:0]           csr_ed_addr [2],
  input  logic [$clog2(N)-1:0]    csr_ed_col  [2],
  input  logic [W-1:0]            csr_ed_val  [2],
  // direct row port of the FW tile
  input  logic                    fw_wr_en,
  input  logic [$clog2(N)-1:0]    fw_wr_row,
  input  logic [W-1:0]            fw_wr_data [N],
  input  logic                    fw_rd_en,
  input  logic [$clog2(N)-1:0]    fw_rd_row,
  output logic [W-1:0]            fw_rd_data [N],
  output logic                    fw_rd_valid,
  // direct port of the MP tile
  input  logic                    mp_wr_en,
  input  logic [1:0]              mp_wr_sel,
  input  logic [$clog2(N)-1:0]    mp_wr_idx,
  input  logic [W-1:0]            mp_wr_data [N],
  input  logic                    mp_rd_en,
  input  logic [$clog2(N)-1:0]    mp_rd_idx,
  output logic [W-1:0]            mp_rd_data [N],
  output logic                    mp_rd_valid,
  input  logic [W-1:0]            mp_d1_row [N],
  // statistics
  output logic [31:0]             fw_pruned,
  output logic [31:0]             fw_futile,
  output logic [31:0]             fw_stalls,
  output logic [31:0]             fw_writes,
  output logic [31:0]             mp_updates,
  output logic [31:0]             mp_skipped,
  output logic [31:0]             csr_edges [2],
  output logic [31:0]             n_cmds [5]
);

  logic [1:0]              eng_start, eng_done, eng_busy, eng_valid;
  logic [$clog2(N+1)-1:0]  eng_rows, fw_nvert;
  logic [1:0]              route_sel;
  logic                    fw_start, fw_done, fw_busy, mp_start, mp_done, mp_busy;
  logic [$clog2(N)-1:0]    mp_m;
  logic [$clog2(N)-1:0]    eng_row  [2];
  logic [W-1:0]            eng_data [2][N];

  main_controller #(.N(N)) u_main (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .resp_done,
    .eng_start, .eng_rows, .eng_done, .route_mp_sel(route_sel),
    .fw_start, .fw_nvert, .fw_done, .mp_start, .mp_m, .mp_done, .n_cmds
  );

  for (genvar e = 0; e < 2; e++) begin : g_eng
    csr_stream_engine #(.N(N), .W(W), .AW(AW)) u_csr (
      .clk, .rst_n, .start(eng_start[e]), .n_rows(eng_rows),
      .busy(eng_busy[e]), .done(eng_done[e]),
      .rp_addr(csr_rp_addr[e]), .rp_data(csr_rp_data[e]),
      .ed_addr(csr_ed_addr[e]), .ed_col(csr_ed_col[e]), .ed_val(csr_ed_val[e]),
      .out_valid(eng_valid[e]), .out_ready(1'b1), .out_row(eng_row[e]),
      .out_data(eng_data[e]), .n_edges(csr_edges[e])
    );
  end

  // ---- FW tile: engine 0 rows or direct host rows ----
  logic                 fw_ld_en;
  logic [$clog2(N)-1:0] fw_ld_row;
  logic [W-1:0]         fw_ld_data [N];
  always_comb begin
    fw_ld_en   = eng_valid[0] || fw_wr_en;
    fw_ld_row  = eng_valid[0] ? eng_row[0] : fw_wr_row;
    fw_ld_data = eng_valid[0] ? eng_data[0] : fw_wr_data;
  end

  pcm_fw_tile #(.N(N), .W(W), .R(R), .WR_LAT(WR_LAT)) u_fw (
    .clk, .rst_n,
    .ld_en(fw_ld_en), .ld_row(fw_ld_row), .ld_data(fw_ld_data),
    .rd_en(fw_rd_en), .rd_row(fw_rd_row), .rd_data(fw_rd_data), .rd_valid(fw_rd_valid),
    .start(fw_start), .n_vert(fw_nvert), .busy(fw_busy), .done(fw_done),
    .n_pruned(fw_pruned), .n_futile(fw_futile), .n_stall(fw_stalls), .n_writes(fw_writes)
  );

  // ---- MP tile: engine 1 vectors or direct host vectors ----
  logic                 mp_ld_en;
  logic [1:0]           mp_ld_sel;
  logic [$clog2(N)-1:0] mp_ld_idx;
  logic [W-1:0]         mp_ld_data [N];
  always_comb begin
    mp_ld_en   = eng_valid[1] || mp_wr_en;
    mp_ld_sel  = eng_valid[1] ? route_sel : mp_wr_sel;
    mp_ld_idx  = eng_valid[1] ? eng_row[1] : mp_wr_idx;
    mp_ld_data = eng_valid[1] ? eng_data[1] : mp_wr_data;
  end

  pcm_mp_tile #(.N(N), .W(W), .R(R), .GROUP(GROUP), .WR_LAT(WR_LAT)) u_mp (
    .clk, .rst_n,
    .wr_en(mp_ld_en), .wr_sel(mp_ld_sel), .wr_idx(mp_ld_idx), .wr_data(mp_ld_data),
    .rd_en(mp_rd_en), .rd_idx(mp_rd_idx), .rd_data(mp_rd_data), .rd_valid(mp_rd_valid),
    .start(mp_start), .m(mp_m), .d1_row(mp_d1_row), .busy(mp_busy), .done(mp_done),
    .n_updates(mp_updates), .n_skipped(mp_skipped)
  );

endmodule
