// tb_felix_bitserial_alu: 64 lanes of 16-bit words are added and subtracted
// bit-serially, LSB first, one bit per cycle, exactly as the tiles drive the
// slice. Sums are compared with a + b, and the final sum bit of a - b with
// the sign of the difference (the min-comparison used by the tiles).
module tb_felix_bitserial_alu;
  localparam int L = 64, W = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic en, first, sub;
  logic [L-1:0] a, b, sum, cn;
  felix_bitserial_alu #(.LANES(L)) dut (.clk, .rst_n, .en, .first, .sub, .a, .b, .sum, .carry_next(cn));

  logic [W-1:0] wa [L], wb [L], res [L];

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; first = 0; sub = 0; a = '0; b = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      sub = t[0];
      for (int l = 0; l < L; l++) begin
        // keep operands below 2^(W-1) so the sign bit is the comparison
        wa[l] = W'($urandom_range(0, (1 << (W - 1)) - 1));
        wb[l] = (l % 9 == 0) ? wa[l] : W'($urandom_range(0, (1 << (W - 1)) - 1));
      end
      for (int bit_i = 0; bit_i < W; bit_i++) begin
        @(negedge clk);
        en = 1; first = (bit_i == 0);
        for (int l = 0; l < L; l++) begin a[l] = wa[l][bit_i]; b[l] = wb[l][bit_i]; end
        #1;
        for (int l = 0; l < L; l++) res[l][bit_i] = sum[l];
      end
      @(negedge clk); en = 0;
      for (int l = 0; l < L; l++) begin
        checks++;
        if (!sub && res[l] !== W'(wa[l] + wb[l])) begin
          failures++; $display("FAIL add lane %0d: %0d + %0d -> %0d", l, wa[l], wb[l], res[l]);
        end
        if (sub && res[l][W-1] !== (wa[l] < wb[l])) begin
          failures++; $display("FAIL cmp lane %0d: %0d vs %0d sign %0b", l, wa[l], wb[l], res[l][W-1]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
