// pcm_mp_tile: a PCM-MP tile that performs the two-stage min-plus merge of
// the recursive APSP (cross-component step) for one source row m:
//
//   Temp_Min1[j] = min_i ( D_C1[m,i] + DB[i,j] )              stage 1
//   Temp_Min2[n] = min_j ( Temp_Min1[j] + D_C2[j,n] )         stage 2
//   Dout[m,n]    = Temp_Min2[n] if Temp_Min2[n] < Dout[m,n]   compare-and-swap
//
// Storage uses the same bit-plane layout as the FW tile: R units, each
// wordline one bit of one stored vector across N bitlines; vector v lives
// in unit v % R, wordlines (v / R)*W .. +W-1. DB is stored by columns
// (vector j holds DB[:,j] on lanes i), D_C2 by columns (vector n holds
// D_C2[:,n] on lanes j), Dout by rows. D_C1[m,:] and Temp_Min1 are held in
// two W-wordline staging buffers that are broadcast into every unit.
//
// Sequence per row (all after 'start'):
//   ADD1  (N/R)*W cycles: R units add D_C1[m,:] to one DB vector each, per
//         cycle one bit, FELIX-style (felix_bitserial_alu) -> Temp_Add1.
//   RED1  one Temp_Add1 vector per cycle into the min_comparator_tree,
//         N + tree latency cycles -> Temp_Min1.
//   ADD2 / RED2 the same with Temp_Min1 and D_C2 -> Temp_Min2.
//   CAS   W cycles of bit-serial subtraction Temp_Min2 - Dout[m,:]; the
//         final sign bits form the update mask.
//   WRITE if any mask bit is set, a WR_LAT-cycle selective PCM write of the
//         masked entries; otherwise the write is skipped.
// done pulses one cycle after the end.
//
// Host port (when idle): wr_en with wr_sel 0 = DB column wr_idx, 1 = D_C2
// column wr_idx, 2 = Dout row wr_idx; rd_en reads Dout row rd_idx, valid the
// next cycle. Unused lanes must hold INF.
//
// The two-stage order, the operand names, the tree and the sign-gated write
// follow the paper. The paper places the comparator tree both "in each unit"
// and "in the PCM-MP tile"; this design has one tree per tile. Running the
// stages one after another (no overlap of the adds with the tree) is this
// design's simplification.
//
// Two outputs of sub-blocks are left unread: the comparator tree's index
// (the merge needs only the minimum value) and the ALU's carry_next (the
// ALU holds the carry row itself).
module pcm_mp_tile
  import rapid_pkg::*;
#(
  parameter int unsigned N      = 1024,
  parameter int unsigned W      = DIST_W,
  parameter int unsigned R      = 32,
  parameter int unsigned GROUP  = 32,
  parameter int unsigned WR_LAT = 10
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    wr_en,
  input  logic [1:0]              wr_sel,
  input  logic [$clog2(N)-1:0]    wr_idx,
  input  logic [W-1:0]            wr_data [N],
  input  logic                    rd_en,
  input  logic [$clog2(N)-1:0]    rd_idx,
  output logic [W-1:0]            rd_data [N],
  output logic                    rd_valid,
  input  logic                    start,
  input  logic [$clog2(N)-1:0]    m,
  input  logic [W-1:0]            d1_row [N],
  output logic                    busy,
  output logic                    done,
  output logic [31:0]             n_updates,
  output logic [31:0]             n_skipped
);

  localparam int unsigned S   = N / R;
  localparam int unsigned WL  = S * W;
  localparam int unsigned SLW = $clog2(S + 1);
  localparam int unsigned BW  = $clog2(W);
  localparam int unsigned NW  = $clog2(N + 1);
  localparam int unsigned CW  = $clog2(WR_LAT + 1);

  logic [N-1:0] dbt  [R][WL];
  logic [N-1:0] d2t  [R][WL];
  logic [N-1:0] ta1  [R][WL];
  logic [N-1:0] ta2  [R][WL];
  logic [N-1:0] dout [R][WL];
  logic [N-1:0] d1p   [W];          // staging buffer: D_C1[m,:]
  logic [N-1:0] tmin1 [W];          // staging buffer: Temp_Min1
  logic [W-1:0] tmin2 [N];          // Temp_Min2 words
  logic [N-1:0] upd_mask;

  mp_state_e             st;
  logic [SLW-1:0]        s;
  logic [BW-1:0]         b;
  logic [NW-1:0]         fj, oc;     // feed / collect counters of the tree
  logic [$clog2(N)-1:0]  m_q;
  logic [CW-1:0]         wcnt;

  wire last_bit  = (b == BW'(W-1));
  wire last_slot = (32'(s) == S - 1);
  wire [$clog2(WL)-1:0] wl = $clog2(WL)'(32'(s) * W + 32'(b));
  wire [$clog2(WL)-1:0] wl_m = $clog2(WL)'((32'(m_q) / R) * W + 32'(b));

  assign busy = (st != MP_IDLE);

  // ---- bit-serial ALUs ----
  logic [N-1:0] alu_a [R];
  logic [N-1:0] alu_b [R];
  logic [N-1:0] alu_s [R];
  logic [N-1:0] alu_c [R];
  logic         alu_en, alu_sub;
  logic [N-1:0] t2_plane;

  always_comb
    for (int unsigned n = 0; n < N; n++) t2_plane[n] = tmin2[n][b];

  assign alu_en  = (st == MP_ADD1) || (st == MP_ADD2) || (st == MP_CAS);
  assign alu_sub = (st == MP_CAS);

  for (genvar u = 0; u < R; u++) begin : g_alu
    always_comb begin
      unique case (st)
        MP_ADD1: begin alu_a[u] = d1p[b];   alu_b[u] = dbt[u][wl]; end
        MP_ADD2: begin alu_a[u] = tmin1[b]; alu_b[u] = d2t[u][wl]; end
        default: begin
          // CAS runs on unit 0's ALU: Temp_Min2 - Dout[m,:]
          alu_a[u] = t2_plane;
          alu_b[u] = dout[32'(m_q) % R][wl_m];
        end
      endcase
    end
    felix_bitserial_alu #(.LANES(N)) u_alu (
      .clk, .rst_n, .en(alu_en), .first(b == '0), .sub(alu_sub),
      .a(alu_a[u]), .b(alu_b[u]), .sum(alu_s[u]), .carry_next(alu_c[u])
    );
  end

  // ---- comparator tree ----
  logic         t_in_valid, t_out_valid;
  logic [W-1:0] t_in [N];
  logic [W-1:0] t_min;
  logic [$clog2(N)-1:0] t_idx;

  // one stored vector (W wordlines) is read per cycle and transposed to words
  logic [N-1:0] t_planes [W];
  always_comb begin
    t_in_valid = ((st == MP_RED1) || (st == MP_RED2)) && (32'(fj) < N);
    for (int unsigned bb = 0; bb < W; bb++)
      t_planes[bb] = (st == MP_RED2) ? ta2[32'(fj) % R][(32'(fj) / R) * W + bb]
                                     : ta1[32'(fj) % R][(32'(fj) / R) * W + bb];
    for (int unsigned i = 0; i < N; i++)
      for (int unsigned bb = 0; bb < W; bb++)
        t_in[i][bb] = t_planes[bb][i];
  end

  min_comparator_tree #(.N_IN(N), .W(W), .GROUP(GROUP)) u_tree (
    .clk, .rst_n, .in_valid(t_in_valid), .in_data(t_in),
    .out_valid(t_out_valid), .out_min(t_min), .out_idx(t_idx)
  );

  // ---- controller ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= MP_IDLE; s <= '0; b <= '0; fj <= '0; oc <= '0; m_q <= '0; wcnt <= '0;
      done <= 1'b0; n_updates <= '0; n_skipped <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        MP_IDLE: if (start) begin
          m_q <= m; s <= '0; b <= '0; st <= MP_ADD1;
        end
        MP_ADD1, MP_ADD2: begin
          b <= b + BW'(1);
          if (last_bit) begin
            b <= '0;
            s <= s + SLW'(1);
            if (last_slot) begin
              s <= '0; fj <= '0; oc <= '0;
              st <= (st == MP_ADD1) ? MP_RED1 : MP_RED2;
            end
          end
        end
        MP_RED1, MP_RED2: begin
          if (32'(fj) < N) fj <= fj + NW'(1);
          if (t_out_valid) begin
            oc <= oc + NW'(1);
            if (32'(oc) == N - 1) begin
              b  <= '0;
              st <= (st == MP_RED1) ? MP_ADD2 : MP_CAS;
            end
          end
        end
        MP_CAS: begin
          b <= b + BW'(1);
          if (last_bit) begin
            b <= '0;
            if (|(alu_s[0])) begin
              wcnt <= CW'(WR_LAT);
              n_updates <= n_updates + 32'($countones(alu_s[0]));
              st <= MP_WRITE;
            end else begin
              n_skipped <= n_skipped + 1;
              st <= MP_DONE;
            end
          end
        end
        MP_WRITE: begin
          wcnt <= wcnt - CW'(1);
          if (wcnt == CW'(1)) st <= MP_DONE;
        end
        MP_DONE: begin
          done <= 1'b1;
          st   <= MP_IDLE;
        end
        default: st <= MP_IDLE;
      endcase
    end
  end

  // ---- data paths ----
  always_ff @(posedge clk) begin
    if (st == MP_IDLE && start)
      for (int unsigned bb = 0; bb < W; bb++)
        for (int unsigned i = 0; i < N; i++) d1p[bb][i] <= d1_row[i][bb];
    if (st == MP_ADD1)
      for (int unsigned u = 0; u < R; u++) ta1[u][wl] <= alu_s[u];
    if (st == MP_ADD2)
      for (int unsigned u = 0; u < R; u++) ta2[u][wl] <= alu_s[u];
    if (t_out_valid && st == MP_RED1)
      for (int unsigned bb = 0; bb < W; bb++) tmin1[bb][oc[$clog2(N)-1:0]] <= t_min[bb];
    if (t_out_valid && st == MP_RED2)
      tmin2[oc[$clog2(N)-1:0]] <= t_min;
    if (st == MP_CAS && last_bit)
      upd_mask <= alu_s[0];
  end

  // Dout: host writes and the gated compare-and-swap write
  logic [N-1:0] wr_planes [W];
  logic [N-1:0] t2_planes [W];
  logic [N-1:0] rd_planes [W];
  always_comb
    for (int unsigned bb = 0; bb < W; bb++) begin
      for (int unsigned i = 0; i < N; i++) begin
        wr_planes[bb][i] = wr_data[i][bb];
        t2_planes[bb][i] = tmin2[i][bb];
      end
      rd_planes[bb] = dout[32'(rd_idx) % R][(32'(rd_idx) / R) * W + bb];
    end

  always_ff @(posedge clk) begin
    if (wr_en && !busy) begin
      for (int unsigned bb = 0; bb < W; bb++) begin
        if (wr_sel == 2'd0) dbt [32'(wr_idx) % R][(32'(wr_idx) / R) * W + bb] <= wr_planes[bb];
        if (wr_sel == 2'd1) d2t [32'(wr_idx) % R][(32'(wr_idx) / R) * W + bb] <= wr_planes[bb];
        if (wr_sel == 2'd2) dout[32'(wr_idx) % R][(32'(wr_idx) / R) * W + bb] <= wr_planes[bb];
      end
    end
    // selective write: only lanes whose sign bit is set change
    if (st == MP_WRITE && wcnt == CW'(1))
      for (int unsigned bb = 0; bb < W; bb++)
        dout[32'(m_q) % R][(32'(m_q) / R) * W + bb] <= (t2_planes[bb] & upd_mask)
                                                     | (dout[32'(m_q) % R][(32'(m_q) / R) * W + bb] & ~upd_mask);
  end

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
