// tb_main_controller: a random sequence of 40 commands is sent to the main
// controller; the blocks it starts are played by the testbench and answer
// with done after a random delay. Checked: each command starts exactly the
// right block once with the right argument, cmd_ready stays low until the
// block is done, resp_done follows the block's done, and the per-opcode
// counters match.
module tb_main_controller;
  import rapid_pkg::*;
  localparam int N = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid, cmd_ready, resp_done, fw_start, fw_done, mp_start, mp_done;
  cmd_t cmd;
  logic [1:0] eng_start, eng_done, route;
  logic [6:0] eng_rows, fw_nvert;
  logic [5:0] mp_m;
  logic [31:0] n_cmds [5];

  main_controller #(.N(N)) dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .resp_done,
    .eng_start, .eng_rows, .eng_done, .route_mp_sel(route), .fw_start, .fw_nvert, .fw_done,
    .mp_start, .mp_m, .mp_done, .n_cmds);

  // block started by each opcode: LOAD_FW -> engine 0, RUN_FW -> FW tile,
  // LOAD_MP -> engine 1, RUN_MP -> MP tile
  function automatic int blk_of(int op);
    case (op) 1: return 0; 2: return 2; 3: return 1; default: return 3; endcase
  endfunction

  // block models: remember which one was started, answer after a delay
  int starts [4];
  int delay = -1, who = -1, last_arg = -1;
  always @(posedge clk) begin
    eng_done <= '0; fw_done <= 0; mp_done <= 0;
    if (eng_start[0]) begin starts[0]++; who = 0; delay = $urandom_range(1, 6); last_arg = int'(eng_rows); end
    if (eng_start[1]) begin starts[1]++; who = 1; delay = $urandom_range(1, 6); last_arg = int'(eng_rows); end
    if (fw_start)     begin starts[2]++; who = 2; delay = $urandom_range(1, 6); last_arg = int'(fw_nvert); end
    if (mp_start)     begin starts[3]++; who = 3; delay = $urandom_range(1, 6); last_arg = int'(mp_m); end
    if (delay > 0) delay--;
    else if (delay == 0) begin
      case (who) 0: eng_done[0] <= 1; 1: eng_done[1] <= 1; 2: fw_done <= 1; 3: mp_done <= 1; default: ; endcase
      delay = -1;
    end
  end

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_cnt [5];
    cmd_valid = 0; cmd = '0;
    foreach (starts[i]) starts[i] = 0;
    foreach (exp_cnt[i]) exp_cnt[i] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int op, prev_starts [4];
      op = $urandom_range(1, 4);
      prev_starts = starts;
      @(negedge clk);
      cmd_valid = 1; cmd.op = cmd_op_e'(op); cmd.arg = 16'($urandom_range(0, N - 1)); cmd.sel = 2'($urandom_range(0, 2));
      do @(posedge clk); while (!cmd_ready);
      @(negedge clk); cmd_valid = 0;
      do begin
        @(posedge clk);
        if (!resp_done) begin
          checks++; if (cmd_ready) begin failures++; $display("FAIL: ready while busy"); end
        end
      end while (!resp_done);
      exp_cnt[op]++;
      for (int b = 0; b < 4; b++) begin
        checks++;
        if (starts[b] != prev_starts[b] + ((b == blk_of(op)) ? 1 : 0)) begin
          failures++; $display("FAIL: cmd %0d started block %0d %0d times", op, b, starts[b] - prev_starts[b]);
        end
      end
      checks += 2;
      if (last_arg != int'(cmd.arg)) begin failures++; $display("FAIL: argument %0d exp %0d", last_arg, cmd.arg); end
      if (op == 3 && route != cmd.sel) begin failures++; $display("FAIL: MP route %0d", route); end
    end
    @(posedge clk);
    for (int o = 1; o < 5; o++) begin
      checks++; if (n_cmds[o] != 32'(exp_cnt[o])) begin failures++; $display("FAIL: count op %0d", o); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
