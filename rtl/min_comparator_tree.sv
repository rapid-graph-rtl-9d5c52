// min_comparator_tree: pipelined minimum of N_IN unsigned W-bit values.
//
// This is the reduction tree of the PCM-MP tile. A whole row of N_IN words
// is captured into the input buffer in one cycle. Then GROUP-wide trees of
// log2(GROUP) levels find block minima (with their indices), one extra
// register stage latches the block minima, a second tree of
// log2(N_IN/GROUP) levels reduces the block minima, and a final register
// holds the global minimum. With the paper's sizes (1024 inputs, groups of
// 32) this is 1 + 6 + 6 = 13 cycles from in_valid to out_valid, and a new
// row is accepted every cycle. Each comparison is a subtraction whose sign
// bit selects the smaller operand (ties keep the lower index). The stage
// counts follow the paper; the hold registers that make each half six
// cycles, and the tie rule, are this design's choices.
//
// Interface: in_valid/in_data (no back-pressure), out_valid/out_min/out_idx
// exactly LATENCY cycles later.
module min_comparator_tree #(
  parameter int unsigned N_IN  = 1024,
  parameter int unsigned W     = 32,
  parameter int unsigned GROUP = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [W-1:0]             in_data [N_IN],
  output logic                     out_valid,
  output logic [W-1:0]             out_min,
  output logic [$clog2(N_IN)-1:0]  out_idx
);

  localparam int unsigned LOG_N   = $clog2(N_IN);
  localparam int unsigned LOG_G   = $clog2(GROUP);
  localparam int unsigned NST     = LOG_N + 3;     // buffer + levels + 2 holds
  localparam int unsigned IW      = (LOG_N > 0) ? LOG_N : 1;

  // Levels of reduction completed after stage s (stage 0 is the buffer).
  function automatic int unsigned lv_done(int unsigned s);
    if (s <= LOG_G)          return s;
    else if (s <= LOG_N + 1) return s - 1;
    else                     return LOG_N;
  endfunction

  function automatic bit is_hold(int unsigned s);
    return (s == LOG_G + 1) || (s == LOG_N + 2);
  endfunction

  logic [W-1:0]  val [NST][N_IN];
  logic [IW-1:0] idx [NST][N_IN];
  logic          vld [NST];

  // Stage 0: input row buffer.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld[0] <= 1'b0;
    else        vld[0] <= in_valid;
  end
  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int unsigned i = 0; i < N_IN; i++) begin
        val[0][i] <= in_data[i];
        idx[0][i] <= IW'(i);
      end
    end
  end

  for (genvar s = 1; s < NST; s++) begin : g_stage
    localparam int unsigned CNT = N_IN >> lv_done(s);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) vld[s] <= 1'b0;
      else        vld[s] <= vld[s-1];
    end
    if (is_hold(s)) begin : g_hold
      always_ff @(posedge clk) begin
        for (int unsigned i = 0; i < CNT; i++) begin
          val[s][i] <= val[s-1][i];
          idx[s][i] <= idx[s-1][i];
        end
      end
    end else begin : g_reduce
      always_ff @(posedge clk) begin
        for (int unsigned i = 0; i < CNT; i++) begin
          logic [W:0] diff;
          // sign of (right - left): right strictly smaller replaces left
          diff = {1'b0, val[s-1][2*i+1]} - {1'b0, val[s-1][2*i]};
          if (diff[W]) begin
            val[s][i] <= val[s-1][2*i+1];
            idx[s][i] <= idx[s-1][2*i+1];
          end else begin
            val[s][i] <= val[s-1][2*i];
            idx[s][i] <= idx[s-1][2*i];
          end
        end
      end
    end
  end

  assign out_valid = vld[NST-1];
  assign out_min   = val[NST-1][0];
  assign out_idx   = idx[NST-1][0][$clog2(N_IN)-1:0];

endmodule
