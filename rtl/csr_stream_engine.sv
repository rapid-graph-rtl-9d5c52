// csr_stream_engine: expands a CSR matrix (rowptr, col, val) into dense
// distance rows for the PCM tiles.
//
// For row i the engine reads rowptr[i] and rowptr[i+1], fills a row buffer
// with INF, sets the diagonal entry i to 0, then streams the non-zeros of the
// row one per cycle (col[e], val[e]) into the buffer; if a column repeats the
// smaller weight is kept. The finished row is offered on out_valid/out_row/
// out_data and is held until out_ready. Rows 0 .. n_rows-1 are produced in
// order, then done pulses.
//
// Memory interface: synchronous reads with one cycle latency (address in
// cycle t, data in cycle t+1), the timing of the tiles' DMA reads.
// Throughput: nnz(i) + 3 cycles per row plus one hand-off cycle.
//
// The paper gives only the function (CSR-to-dense conversion by "dual
// stream engines" on the logic die) and the CSR format with +inf for missing
// edges. The zero diagonal follows the paper's FW description (pivot
// distance 0); the row-by-row engine, the interface and min-of-duplicates
// are this design's choices.
module csr_stream_engine
  import rapid_pkg::*;
#(
  parameter int unsigned N  = 1024,
  parameter int unsigned W  = DIST_W,
  parameter int unsigned AW = 32          // CSR edge address width
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [$clog2(N+1)-1:0]  n_rows,
  output logic                    busy,
  output logic                    done,
  // rowptr memory
  output logic [$clog2(N+1)-1:0]  rp_addr,
  input  logic [AW-1:0]           rp_data,
  // edge memory (col, val)
  output logic [AW-1:0]           ed_addr,
  input  logic [$clog2(N)-1:0]    ed_col,
  input  logic [W-1:0]            ed_val,
  // dense row output
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [$clog2(N)-1:0]    out_row,
  output logic [W-1:0]            out_data [N],
  output logic [31:0]             n_edges
);

  localparam logic [W-1:0] INF = {3'b000, {(W-3){1'b1}}};
  localparam int unsigned  RW  = $clog2(N+1);

  typedef enum logic [2:0] { CE_IDLE, CE_RP0, CE_RP1, CE_RP2, CE_NZ, CE_EMIT, CE_DONE } ce_state_e;
  ce_state_e       st;
  logic [RW-1:0]   i_q, nr_q;
  logic [AW-1:0]   beg_q, end_q, e_q;
  logic            rsp_vld;        // edge read issued last cycle

  assign busy      = (st != CE_IDLE);
  assign out_valid = (st == CE_EMIT);
  assign out_row   = i_q[$clog2(N)-1:0];

  always_comb begin
    rp_addr = i_q;
    if (st == CE_RP1) rp_addr = i_q + RW'(1);
    ed_addr = e_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= CE_IDLE; i_q <= '0; nr_q <= '0; beg_q <= '0; end_q <= '0; e_q <= '0;
      rsp_vld <= 1'b0; done <= 1'b0; n_edges <= '0;
    end else begin
      done    <= 1'b0;
      rsp_vld <= 1'b0;
      unique case (st)
        CE_IDLE: if (start) begin
          i_q <= '0; nr_q <= n_rows; n_edges <= '0;
          st  <= (n_rows == '0) ? CE_DONE : CE_RP0;
        end
        CE_RP0: st <= CE_RP1;                            // rowptr[i] requested
        CE_RP1: begin beg_q <= rp_data; st <= CE_RP2; end // rowptr[i+1] requested
        CE_RP2: begin
          end_q <= rp_data;
          e_q   <= beg_q;
          st    <= CE_NZ;
        end
        CE_NZ: begin
          if (e_q < end_q) begin
            e_q     <= e_q + AW'(1);
            rsp_vld <= 1'b1;
            n_edges <= n_edges + 1;
          end else if (!rsp_vld) begin
            st <= CE_EMIT;
          end
        end
        CE_EMIT: if (out_ready) begin
          if (i_q + RW'(1) == nr_q) st <= CE_DONE;
          else begin i_q <= i_q + RW'(1); st <= CE_RP0; end
        end
        CE_DONE: begin done <= 1'b1; st <= CE_IDLE; end
        default: st <= CE_IDLE;
      endcase
    end
  end

  // dense row buffer
  always_ff @(posedge clk) begin
    if (st == CE_RP2)
      for (int unsigned j = 0; j < N; j++)
        out_data[j] <= (j == 32'(i_q)) ? '0 : INF;
    else if (rsp_vld && ed_val < out_data[ed_col])
      out_data[ed_col] <= ed_val;
  end

endmodule
