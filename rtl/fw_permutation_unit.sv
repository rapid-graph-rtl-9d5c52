// fw_permutation_unit: controller and DMA timing of a PCM-FW tile.
//
// The paper's permutation macro has a four-stage FSM (Prefetch -> Permute ->
// Compute -> Write-back), a 32-row burst row buffer, a reorder buffer for
// panel masking and block pruning, and an on-tile DMA with 1-cycle reads and
// 10-cycle writes. This module is that FSM plus the DMA write timer; the
// buffers themselves sit in the tile next to the arrays (pcm_fw_tile).
//
// Per pivot k (k = 0 .. n_vert-1):
//   Prefetch  W cycles, one bit-plane of pivot row k per cycle -> Panel_Row.
//   Permute   W cycles per R-row window: bit k of each row is read and
//             broadcast into the mirrored Panel_Col rows; at the last bit the
//             tile reports whether any valid row of the window has a finite
//             pivot-column entry. A window without one cannot improve and is
//             pruned (marked dead in the reorder mask 'live').
//   Compute   per live window, W add cycles then W compare cycles; a dead
//             window costs one cycle.
//   Write-back the sign mask of the window is captured at the last compare
//             bit; if it is non-zero a DMA write of WR_LAT cycles starts and
//             commits the gated write, overlapping the next window's
//             compute. An all-zero mask skips the write (futile write).
//             A capture while the previous write is still running stalls.
// The pivot advances once the last write has committed.
//
// What follows the paper: the stage order, the 1-cycle read / 10-cycle write
// DMA, R = 32-row windows, masking, pruning and futile-write skipping. The
// exact scheduling (one window at a time, write-back overlapped with the
// next window, no overlap across pivots) is this design's choice.
module fw_permutation_unit
  import rapid_pkg::*;
#(
  parameter int unsigned N      = 1024,
  parameter int unsigned W      = 32,
  parameter int unsigned R      = 32,
  parameter int unsigned WR_LAT = 10
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [$clog2(N+1)-1:0]      n_vert,
  // schedule to the tile
  output fw_state_e                   state,
  output logic [$clog2(N)-1:0]        pivot,
  output logic [$clog2(N/R+1)-1:0]    slot,
  output logic [$clog2(W)-1:0]        bitpos,
  output logic                        first,
  output logic                        pf_en,
  output logic                        pm_en,
  output logic                        add_en,
  output logic                        cmp_en,
  output logic                        wb_capture,
  output logic                        wb_commit,
  output logic [$clog2(N/R+1)-1:0]    wb_slot,
  // status from the tile
  input  logic                        win_live,
  input  logic                        mask_any,
  // status to the outside
  output logic                        busy,
  output logic                        done,
  output logic [31:0]                 n_pruned,
  output logic [31:0]                 n_futile,
  output logic [31:0]                 n_stall,
  output logic [31:0]                 n_writes
);

  localparam int unsigned SLW = $clog2(N/R+1);
  localparam int unsigned KW  = $clog2(N);
  localparam int unsigned BW  = $clog2(W);
  localparam int unsigned CW  = $clog2(WR_LAT+1);

  fw_state_e          st;
  logic [KW-1:0]      k_q;
  logic [SLW-1:0]     s_q, nwin_q;
  logic [BW-1:0]      b_q;
  logic [$clog2(N+1)-1:0] nv_q;
  logic [(1<<SLW)-1:0] live_q;        // reorder mask: window needs compute
  logic               wb_busy;
  logic [CW-1:0]      wb_cnt;

  wire last_bit = (b_q == BW'(W-1));
  wire last_win = (s_q == nwin_q - SLW'(1));
  wire last_piv = (32'(k_q) == 32'(nv_q) - 1);

  assign state     = st;
  assign pivot     = k_q;
  assign slot      = s_q;
  assign bitpos    = b_q;
  assign first     = (b_q == '0);
  assign busy      = (st != FW_IDLE);
  assign wb_commit = wb_busy && (wb_cnt == CW'(1));

  always_comb begin
    pf_en      = (st == FW_PREFETCH);
    pm_en      = (st == FW_PERMUTE);
    add_en     = (st == FW_ADD) && live_q[s_q];
    cmp_en     = (st == FW_CMP) && !(last_bit && wb_busy);
    wb_capture = cmp_en && last_bit;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= FW_IDLE; k_q <= '0; s_q <= '0; b_q <= '0; nv_q <= '0; nwin_q <= '0;
      live_q <= '0; wb_busy <= 1'b0; wb_cnt <= '0; wb_slot <= '0; done <= 1'b0;
      n_pruned <= '0; n_futile <= '0; n_stall <= '0; n_writes <= '0;
    end else begin
      done <= 1'b0;
      // DMA write timer
      if (wb_busy) begin
        wb_cnt <= wb_cnt - CW'(1);
        if (wb_cnt == CW'(1)) wb_busy <= 1'b0;
      end
      unique case (st)
        FW_IDLE: if (start) begin
          nv_q     <= n_vert;
          nwin_q   <= SLW'((32'(n_vert) + R - 1) / R);
          k_q      <= '0; b_q <= '0; s_q <= '0;
          n_pruned <= '0; n_futile <= '0; n_stall <= '0; n_writes <= '0;
          st       <= (n_vert == '0) ? FW_DONE : FW_PREFETCH;
        end
        FW_PREFETCH: begin
          b_q <= b_q + BW'(1);
          if (last_bit) begin b_q <= '0; s_q <= '0; st <= FW_PERMUTE; end
        end
        FW_PERMUTE: begin
          b_q <= b_q + BW'(1);
          if (last_bit) begin
            live_q[s_q] <= win_live;
            b_q <= '0;
            if (last_win) begin s_q <= '0; st <= FW_ADD; end
            else s_q <= s_q + SLW'(1);
          end
        end
        FW_ADD: begin
          if (!live_q[s_q]) begin
            n_pruned <= n_pruned + 1;
            if (last_win) st <= FW_PIVOT_END;
            else s_q <= s_q + SLW'(1);
          end else begin
            b_q <= b_q + BW'(1);
            if (last_bit) begin b_q <= '0; st <= FW_CMP; end
          end
        end
        FW_CMP: begin
          if (last_bit && wb_busy) begin
            n_stall <= n_stall + 1;
          end else begin
            b_q <= b_q + BW'(1);
            if (last_bit) begin
              b_q <= '0;
              if (mask_any) begin
                wb_busy  <= 1'b1;
                wb_cnt   <= CW'(WR_LAT);
                wb_slot  <= s_q;
                n_writes <= n_writes + 1;
              end else begin
                n_futile <= n_futile + 1;
              end
              if (last_win) st <= FW_PIVOT_END;
              else begin s_q <= s_q + SLW'(1); st <= FW_ADD; end
            end
          end
        end
        FW_PIVOT_END: if (!wb_busy) begin
          if (last_piv) st <= FW_DONE;
          else begin k_q <= k_q + KW'(1); b_q <= '0; s_q <= '0; st <= FW_PREFETCH; end
        end
        FW_DONE: begin
          done <= 1'b1;
          st   <= FW_IDLE;
        end
        default: st <= FW_IDLE;
      endcase
    end
  end

  // A capture must never start a second DMA write while one is in flight.
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
                                 wb_capture |-> !wb_busy);

endmodule
