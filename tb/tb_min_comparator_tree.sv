// tb_min_comparator_tree: the comparator tree at the paper's size (1024
// inputs of 32 bits, groups of 32). Thirty random rows are streamed back to
// back, one per cycle; each result must appear exactly 13 cycles after its
// row (1 buffer + 6 + 6) and equal the minimum and the lowest index holding
// it, computed here by a linear scan. Some rows have planted duplicate
// minima and extreme values.
module tb_min_comparator_tree;
  localparam int N = 1024, W = 32, LAT = 13, ROWS = 30;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, out_valid;
  logic [W-1:0] in_data [N];
  logic [W-1:0] out_min;
  logic [9:0]   out_idx;

  min_comparator_tree #(.N_IN(N), .W(W), .GROUP(32)) dut (
    .clk, .rst_n, .in_valid, .in_data, .out_valid, .out_min, .out_idx);

  logic [W-1:0] exp_min [ROWS];
  int           exp_idx [ROWS];
  int           sent_at [ROWS];
  int cyc = 0, got = 0, sent = 0;

  // edge counter; a row is sent at the edge that samples in_valid, and its
  // result must be sampled at the edge LAT cycles later
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (in_valid) begin sent_at[sent] <= cyc; sent <= sent + 1; end
    if (rst_n && out_valid) begin
      checks += 3;
      if (out_min !== exp_min[got]) begin failures++; $display("FAIL row %0d min %h exp %h", got, out_min, exp_min[got]); end
      if (32'(out_idx) != exp_idx[got]) begin failures++; $display("FAIL row %0d idx %0d exp %0d", got, out_idx, exp_idx[got]); end
      if (cyc - sent_at[got] != LAT) begin failures++; $display("FAIL row %0d latency %0d", got, cyc - sent_at[got]); end
      got <= got + 1;
    end
  end

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0;
    foreach (in_data[i]) in_data[i] = '0;
    repeat (3) @(posedge clk); rst_n <= 1; @(posedge clk);
    @(negedge clk);
    for (int r = 0; r < ROWS; r++) begin
      for (int i = 0; i < N; i++)
        in_data[i] = (r % 3 == 0) ? 32'($urandom) : 32'($urandom_range(1000, 100000));
      if (r % 5 == 1) begin in_data[700] = 32'd7; in_data[33] = 32'd7; end
      if (r % 7 == 2) in_data[1023] = 32'd0;
      if (r == 4) foreach (in_data[i]) in_data[i] = 32'hFFFF_FFFF;
      exp_min[r] = in_data[0]; exp_idx[r] = 0;
      for (int i = 1; i < N; i++)
        if (in_data[i] < exp_min[r]) begin exp_min[r] = in_data[i]; exp_idx[r] = i; end
      in_valid = 1;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    checks++; if (got != ROWS) begin failures++; $display("FAIL: %0d results", got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
