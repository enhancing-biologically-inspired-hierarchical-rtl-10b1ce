// Shared constants and types of the accelerated HTM reflex memory.
//
// The sizes are those of the CAM organisation used for the evaluated design:
// 2048 entries of 1024-bit SDRs, built from M = 16 AFeCAM arrays per stage,
// each array made of n = 128 subarrays of P x Q = 128 x 8 cells, and N = 3
// stages (present state, confidence level, next state). The confidence level
// is one Q-bit count per entry. The control unit compares the sums of the last
// four anomaly scores. Widths and encodings not fixed by these numbers (time
// stamps, fixed-point anomaly scores, command encodings) are choices of this
// design.
package htm_pkg;

  localparam int unsigned M_ARR    = 16;    // arrays per stage (row decoder range)
  localparam int unsigned N_STAGE  = 3;     // stages (column decoder range)
  localparam int unsigned N_SUB    = 128;   // subarrays per array (n)
  localparam int unsigned P_ROWS   = 128;   // rows per subarray (P)
  localparam int unsigned Q_COLS   = 8;     // bits per subarray row (Q)
  localparam int unsigned SDR_W    = N_SUB * Q_COLS;   // 1024-bit SDR
  localparam int unsigned ENTRIES  = M_ARR * P_ROWS;   // 2048 RM entries
  localparam int unsigned CU_WIN   = 4;     // anomaly-score window of the control unit
  localparam int unsigned ARS_FRAC = 8;     // fractional bits of an anomaly score
  localparam int unsigned TS_W     = 16;    // time stamp width

  // Stage code given to the column decoder. STG_PAIR activates the present
  // and next state stages together for a pair search.
  typedef enum logic [1:0] {
    STG_PRESENT = 2'd0,
    STG_CONF    = 2'd1,
    STG_NEXT    = 2'd2,
    STG_PAIR    = 2'd3
  } stage_e;

  // Primitive operations of the CAM unit, one per command.
  typedef enum logic [3:0] {
    CAM_NOP      = 4'd0,
    CAM_WRITE    = 4'd1,  // write one row in the selected stage(s)
    CAM_PRESRCH  = 4'd2,  // pre-search phase of a search (searched '0' bits)
    CAM_SEARCH   = 4'd3,  // search phase (searched '1' bits); match valid in the next cycle
    CAM_MM_LOAD  = 4'd4,  // load the min/max candidate rows
    CAM_MM_STEP  = 4'd5,  // search one bit position of the candidate counts
    CAM_MM_APPLY = 4'd6,  // exclude the candidates that missed (unless all missed)
    CAM_RD_BIT   = 4'd7,  // precharge + pre-search of one column; Q'_A shifts into a SIPO
    CAM_RD_CLR   = 4'd8   // clear the SIPO registers before a read
  } cam_op_e;

  // Drive modes of the input buffer.
  typedef enum logic [1:0] {
    IB_IDLE   = 2'd0,  // no line driven
    IB_WRITE  = 2'd1,  // all bit lines carry the written word
    IB_PRESRC = 2'd2,  // pre-search phase: only the '0' bits are searched
    IB_SEARCH = 2'd3   // search phase: only the '1' bits are searched
  } ib_mode_e;

  // Requests accepted by the reflex memory.
  typedef enum logic [1:0] {
    RM_STEP  = 2'd0,   // learn (previous -> this SDR), then predict from this SDR
    RM_EVICT = 2'd1,   // update operation: clear the entry holding (R_i, R_i+1)
    RM_RESET = 2'd2    // forget the previous SDR (start of a new stream)
  } rm_op_e;

  // Training directive for the external sequence memory (control unit rules).
  typedef enum logic [1:0] {
    SM_UPDATE  = 2'd0,  // RM wrong, SM wrong: both update
    SM_NONE    = 2'd1,  // RM wrong, SM right: SM output used, RM retrained
    SM_REGULAR = 2'd2,  // RM right, SM wrong: regular confidence update
    SM_HIGH    = 2'd3   // RM right, SM right: higher confidence update
  } sm_train_e;

endpackage
