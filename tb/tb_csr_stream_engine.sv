// tb_csr_stream_engine: a random CSR graph of 12 rows (N=16, W=12) with
// empty rows, repeated columns and self-loops is expanded; out_ready is
// toggled randomly. Each emitted row must equal the dense matrix built here
// (INF where no edge, 0 on the diagonal, smallest weight of repeated
// columns), rows must come in order, and the edge counter must equal nnz.
module tb_csr_stream_engine;
  localparam int N = 16, W = 12, AW = 16, NR = 12;
  localparam logic [W-1:0] INF = {3'b000, {(W-3){1'b1}}};
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, out_valid, out_ready;
  logic [4:0]    rp_addr;
  logic [AW-1:0] rp_data, ed_addr;
  logic [3:0]    ed_col, out_row;
  logic [W-1:0]  ed_val, out_data [N];
  logic [31:0]   n_edges;

  csr_stream_engine #(.N(N), .W(W), .AW(AW)) dut (
    .clk, .rst_n, .start, .n_rows(5'(NR)), .busy, .done, .rp_addr, .rp_data,
    .ed_addr, .ed_col, .ed_val, .out_valid, .out_ready, .out_row, .out_data, .n_edges);

  // CSR memories with one-cycle read latency
  logic [AW-1:0] rowptr [NR+1];
  logic [3:0]    col    [256];
  logic [W-1:0]  val    [256];
  logic [W-1:0]  dense  [NR][N];
  always @(posedge clk) begin
    rp_data <= rowptr[rp_addr];
    ed_col  <= col[ed_addr[7:0]];
    ed_val  <= val[ed_addr[7:0]];
  end

  int next_row = 0, nnz = 0;
  always @(posedge clk) begin
    out_ready <= ($urandom_range(0, 2) != 0);
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (32'(out_row) != next_row) begin failures++; $display("FAIL: row %0d, expected %0d", out_row, next_row); end
      for (int j = 0; j < N; j++) begin
        checks++;
        if (out_data[j] !== dense[out_row][j]) begin
          failures++; $display("FAIL: row %0d col %0d = %0d exp %0d", out_row, j, out_data[j], dense[out_row][j]);
        end
      end
      next_row++;
    end
  end

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0;
    for (int e = 0; e < 256; e++) begin col[e] = '0; val[e] = '0; end
    for (int i = 0; i < NR; i++) begin
      int deg;
      rowptr[i] = AW'(nnz);
      for (int j = 0; j < N; j++) dense[i][j] = (i == j) ? '0 : INF;
      deg = (i % 5 == 3) ? 0 : $urandom_range(1, 8);
      for (int d = 0; d < deg; d++) begin
        int c; logic [W-1:0] v;
        c = (d == 2) ? i : $urandom_range(0, N - 1);     // one self-loop per busy row
        v = W'($urandom_range(1, 300));
        col[nnz] = 4'(c); val[nnz] = v; nnz++;
        if (c != i && v < dense[i][c]) dense[i][c] = v;
      end
    end
    rowptr[NR] = AW'(nnz);
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    wait (done); @(posedge clk);
    checks += 2;
    if (next_row != NR) begin failures++; $display("FAIL: %0d rows emitted", next_row); end
    if (n_edges != 32'(nnz)) begin failures++; $display("FAIL: %0d edges counted, %0d in CSR", n_edges, nnz); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
