// rapid_pkg: types and constants shared by the RAPID-Graph compute core.
//
// Distances are unsigned DIST_W-bit integers. "No edge" is encoded as
// DIST_INF = 2^(DIST_W-3)-1, so that a sum of up to three distances (the
// min-plus merge adds D1 + DB + D2) still fits below 2^(DIST_W-1) and the
// sign bit of a bit-serial subtraction gives the correct comparison. The
// 32-bit width follows the paper's 32-bit comparator tree; the INF encoding
// is this design's own choice (the paper only writes "infinity").
package rapid_pkg;

  parameter int unsigned DIST_W   = 32;
  parameter logic [DIST_W-1:0] DIST_INF = {3'b000, {(DIST_W-3){1'b1}}};

  // Stages of the PCM-FW permutation unit FSM (Prefetch -> Permute ->
  // Compute -> Write-back), plus the states needed around them.
  typedef enum logic [2:0] {
    FW_IDLE,
    FW_PREFETCH,   // pivot row k -> Panel_Row (one bit-plane per cycle)
    FW_PERMUTE,    // pivot column k -> mirrored Panel_Col, window liveness
    FW_ADD,        // Temp_Main = Panel_Col + Panel_Row, bit-serial
    FW_CMP,        // sign(Temp_Main - Main_Block), bit-serial
    FW_PIVOT_END,  // drain the write-back, advance the pivot
    FW_DONE
  } fw_state_e;

  // Stages of the PCM-MP tile controller.
  typedef enum logic [2:0] {
    MP_IDLE,
    MP_ADD1,       // Temp_Add1 = D_C1[m,:] + DB[:,j]
    MP_RED1,       // Temp_Min1[j] = min_i Temp_Add1[j][i]
    MP_ADD2,       // Temp_Add2 = Temp_Min1 + D_C2[:,n]
    MP_RED2,       // Temp_Min2[n] = min_j Temp_Add2[n][j]
    MP_CAS,        // sign(Temp_Min2 - Dout[m,:])
    MP_WRITE,      // masked write of the smaller entries
    MP_DONE
  } mp_state_e;

  // Commands accepted by the global main controller.
  typedef enum logic [2:0] {
    CMD_NOP      = 3'd0,
    CMD_LOAD_FW  = 3'd1,  // CSR -> dense rows into the PCM-FW tile
    CMD_RUN_FW   = 3'd2,  // Floyd-Warshall on the first arg vertices
    CMD_LOAD_MP  = 3'd3,  // CSR (column-major) -> dense columns into the MP tile
    CMD_RUN_MP   = 3'd4   // one min-plus merge row (arg = row m)
  } cmd_op_e;

  typedef struct packed {
    cmd_op_e     op;
    logic [1:0]  sel;     // CMD_LOAD_MP: 0 = DB columns, 1 = D_C2 columns, 2 = Dout rows
    logic [15:0] arg;     // vertex count or row index
  } cmd_t;

endpackage
