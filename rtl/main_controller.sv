// main_controller: global controller of the compute core on the logic die.
//
// It accepts one command at a time from the host (cmd_valid/cmd_ready
// handshake, cmd_t from rapid_pkg), starts the block that executes it, and
// pulses resp_done when that block reports done:
//   CMD_LOAD_FW  start CSR stream engine 0 for arg rows; its dense rows are
//                routed into the PCM-FW tile (dataflow step 1 of the paper).
//   CMD_RUN_FW   start the FW tile on arg vertices (step 2).
//   CMD_LOAD_MP  start CSR stream engine 1 for arg vectors; they are written
//                into the MP tile region chosen by sel (DB columns, D_C2
//                columns or Dout rows).
//   CMD_RUN_MP   start one min-plus merge row m = arg on the MP tile (step 4).
// While a command runs, cmd_ready is low. route_mp_sel tells the top where
// engine 1's rows go. n_cmds counts completed commands per opcode.
//
// The paper only names a "global main controller" linked to the tile
// controllers; this command set and handshake are this design's own.
module main_controller
  import rapid_pkg::*;
#(
  parameter int unsigned N = 1024
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    cmd_valid,
  output logic                    cmd_ready,
  input  cmd_t                    cmd,
  output logic                    resp_done,
  // engine 0 -> FW tile, engine 1 -> MP tile
  output logic [1:0]              eng_start,
  output logic [$clog2(N+1)-1:0]  eng_rows,
  input  logic [1:0]              eng_done,
  output logic [1:0]              route_mp_sel,
  output logic                    fw_start,
  output logic [$clog2(N+1)-1:0]  fw_nvert,
  input  logic                    fw_done,
  output logic                    mp_start,
  output logic [$clog2(N)-1:0]    mp_m,
  input  logic                    mp_done,
  output logic [31:0]             n_cmds [5]
);

  typedef enum logic [1:0] { MC_IDLE, MC_ISSUE, MC_WAIT } mc_state_e;
  mc_state_e st;
  cmd_t      cur;

  assign cmd_ready = (st == MC_IDLE);

  always_comb begin
    eng_start = '0;
    fw_start  = 1'b0;
    mp_start  = 1'b0;
    if (st == MC_ISSUE) begin
      unique case (cur.op)
        CMD_LOAD_FW: eng_start[0] = 1'b1;
        CMD_LOAD_MP: eng_start[1] = 1'b1;
        CMD_RUN_FW:  fw_start     = 1'b1;
        CMD_RUN_MP:  mp_start     = 1'b1;
        default: ;
      endcase
    end
    eng_rows     = $clog2(N+1)'(cur.arg);
    fw_nvert     = $clog2(N+1)'(cur.arg);
    mp_m         = $clog2(N)'(cur.arg);
    route_mp_sel = cur.sel;
  end

  logic blk_done;
  always_comb begin
    unique case (cur.op)
      CMD_LOAD_FW: blk_done = eng_done[0];
      CMD_LOAD_MP: blk_done = eng_done[1];
      CMD_RUN_FW:  blk_done = fw_done;
      CMD_RUN_MP:  blk_done = mp_done;
      default:     blk_done = 1'b1;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= MC_IDLE; cur <= '0; resp_done <= 1'b0;
      for (int c = 0; c < 5; c++) n_cmds[c] <= '0;
    end else begin
      resp_done <= 1'b0;
      unique case (st)
        MC_IDLE:  if (cmd_valid) begin cur <= cmd; st <= MC_ISSUE; end
        MC_ISSUE: st <= (cur.op == CMD_NOP) ? MC_IDLE : MC_WAIT;
        MC_WAIT:  if (blk_done) begin
          resp_done <= 1'b1;
          n_cmds[cur.op] <= n_cmds[cur.op] + 1;
          st <= MC_IDLE;
        end
        default: st <= MC_IDLE;
      endcase
    end
  end

  // a command is only taken when the controller is ready
  a_cmd_handshake: assert property (@(posedge clk) disable iff (!rst_n)
                                    (st == MC_ISSUE) |-> $past(cmd_valid && cmd_ready));

endmodule
