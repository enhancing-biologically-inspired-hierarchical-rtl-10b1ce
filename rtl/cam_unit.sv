// CAM unit of the hardware reflex memory: three stages of AFeCAM storage.
//
//   present state : M arrays of NSUB subarrays (P x Q), one SDR per entry
//   confidence    : M customized subarrays (P x Q), one Q-bit count per entry
//   next state    : M arrays like the present stage, read out through a
//                   block of NSUB Q-bit SIPO registers (the predicted SDR)
//
// An entry address is {array, row}: the row decoder turns the array part into
// one of M array selects, the row part drives the word line inside the
// array. The column decoder picks the stage(s) an operation acts on; each
// stage has its own input buffer. Every clock the unit executes one
// primitive (op):
//   CAM_WRITE    write data_a (or data_b in the next stage of a pair write)
//                into entry addr of the selected stage(s); 1 clock
//   CAM_PRESRCH, CAM_SEARCH
//                the two phases of an exact-match search of every entry of
//                the selected stage(s); pres_match / next_match are valid
//                from the clock after CAM_SEARCH until the next search
//   CAM_MM_LOAD  load the min/max candidates from mm_init
//   CAM_MM_STEP, CAM_MM_APPLY
//                one bit iteration (column col, mm_max selects max or min)
//                of the min/max search in the confidence stage; mm_cand
//                holds the surviving entries
//   CAM_RD_CLR, CAM_RD_BIT
//                bit-serial read of entry addr in the next-state (or
//                confidence) stage: each CAM_RD_BIT pre-searches column col
//                with '0' and, one clock later, the Q'_A bit of the addressed
//                row shifts into the SIPO registers. After Q such clocks,
//                columns Q-1 down to 0, pred (or conf_rd) holds the entry.
// The sizes default to the evaluated organisation: 2048 entries of 1024 bits.
module cam_unit
  import htm_pkg::*;
#(
  parameter int unsigned M    = 16,
  parameter int unsigned NSUB = 128,
  parameter int unsigned P    = 128,
  parameter int unsigned Q    = 8,
  localparam int unsigned W   = NSUB * Q,
  localparam int unsigned ENT = M * P,
  localparam int unsigned AW  = $clog2(ENT),
  localparam int unsigned PW  = $clog2(P),
  localparam int unsigned MW  = $clog2(M),
  localparam int unsigned CW  = $clog2(Q)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  cam_op_e         op,
  input  stage_e          stage,
  input  logic [AW-1:0]   addr,
  input  logic [W-1:0]    data_a,
  input  logic [W-1:0]    data_b,
  input  logic [CW-1:0]   col,
  input  logic            mm_max,
  input  logic [ENT-1:0]  mm_init,
  output logic [ENT-1:0]  pres_match,
  output logic [ENT-1:0]  next_match,
  output logic [ENT-1:0]  mm_cand,
  output logic            mm_glob_hit,
  output logic [W-1:0]    pred,
  output logic [Q-1:0]    conf_rd
);
  // ---------------------------------------------------------------- decoding
  logic [2:0]    ssel;            // {next, conf, present}
  logic [M-1:0]  asel;
  logic [P-1:0]  rsel;
  logic          is_wr, is_pre, is_rd;
  logic [MW-1:0] a_arr;
  logic [PW-1:0] a_row;

  assign a_arr  = addr[AW-1:PW];
  assign a_row  = addr[PW-1:0];
  assign is_wr  = (op == CAM_WRITE);
  assign is_rd  = (op == CAM_RD_BIT);
  assign is_pre = (op == CAM_PRESRCH) || (op == CAM_SEARCH) || is_rd;

  column_decoder u_coldec (
    .en   (is_wr || is_pre),
    .code (stage),
    .sel  (ssel)
  );

  row_decoder #(.M(M)) u_rowdec (
    .en   (is_wr || is_rd),
    .addr (a_arr),
    .sel  (asel)
  );

  always_comb begin
    rsel = '0;
    rsel[a_row] = 1'b1;
  end

  // ------------------------------------------------------------ input buffers
  ib_mode_e  ib_mode;
  logic [W-1:0] pres_din, next_din;
  logic [W-1:0] pres_care, pres_val, pres_wd;
  logic [W-1:0] next_care, next_val, next_wd;

  always_comb begin
    unique case (op)
      CAM_WRITE:   ib_mode = IB_WRITE;
      CAM_PRESRCH: ib_mode = IB_PRESRC;
      CAM_RD_BIT:  ib_mode = IB_PRESRC;
      CAM_SEARCH:  ib_mode = IB_SEARCH;
      default:     ib_mode = IB_IDLE;
    endcase
  end

  assign pres_din = is_rd ? '0 : data_a;
  assign next_din = is_rd ? '0 : ((stage == STG_PAIR) ? data_b : data_a);

  input_buffer #(.W(W), .Q(Q)) u_ib_pres (
    .din (pres_din), .mode (ib_mode), .col_en (is_rd), .col (col),
    .sl_care (pres_care), .sl_val (pres_val), .wr_data (pres_wd)
  );
  input_buffer #(.W(W), .Q(Q)) u_ib_next (
    .din (next_din), .mode (ib_mode), .col_en (is_rd), .col (col),
    .sl_care (next_care), .sl_val (next_val), .wr_data (next_wd)
  );

  // Confidence stage buffer: count writes, column reads and min/max steps.
  ib_mode_e     cf_mode;
  logic [Q-1:0] cf_din, cf_care, cf_val, cf_wd;
  logic         mm_step;
  assign mm_step = (op == CAM_MM_STEP);

  always_comb begin
    cf_din  = data_a[Q-1:0];
    cf_mode = ib_mode;
    if (mm_step) begin
      cf_din  = mm_max ? '1 : '0;
      cf_mode = mm_max ? IB_SEARCH : IB_PRESRC;
    end else if (is_rd) begin
      cf_din  = '0;
    end
  end

  input_buffer #(.W(Q), .Q(Q)) u_ib_conf (
    .din (cf_din), .mode (cf_mode), .col_en (is_rd || mm_step), .col (col),
    .sl_care (cf_care), .sl_val (cf_val), .wr_data (cf_wd)
  );

  // ------------------------------------------------- read-out bookkeeping
  // The Q'_A bit of a pre-search is latched at the clock edge, so the SIPO
  // shifts one clock after each CAM_RD_BIT, from the row addressed then.
  logic          rd_next_q, rd_conf_q;
  logic [MW-1:0] rd_arr_q;
  logic [PW-1:0] rd_row_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_next_q <= 1'b0;
      rd_conf_q <= 1'b0;
      rd_arr_q  <= '0;
      rd_row_q  <= '0;
    end else begin
      rd_next_q <= is_rd && ssel[2];
      rd_conf_q <= is_rd && ssel[1];
      if (is_rd) begin
        rd_arr_q <= a_arr;
        rd_row_q <= a_row;
      end
    end
  end

  // ------------------------------------------------------------------ stages
  logic [M-1:0][NSUB-1:0] next_rd_bits;
  logic [M-1:0]           conf_rd_bit, conf_any;
  logic [M-1:0][P-1:0]    conf_cand;

  for (genvar a = 0; a < M; a++) begin : g_arr
    logic [NSUB-1:0] pres_rd_unused;
    logic            pv_unused;
    logic [PW-1:0]   pa_unused;
    // A bit read precharges only the addressed array.
    logic act_rd;
    assign act_rd = !is_rd || asel[a];

    afecam_array #(.NSUB(NSUB), .P(P), .Q(Q)) u_pres (
      .clk     (clk),
      .rst_n   (rst_n),
      .wr_en   (is_wr && ssel[0] && asel[a]),
      .row_sel (rsel),
      .wr_data (pres_wd),
      .pre     (is_pre && ssel[0] && act_rd),
      .ph      (op == CAM_SEARCH),
      .sl_care (pres_care),
      .sl_val  (pres_val),
      .pre_en  ('1),
      .rd_row  (rd_row_q),
      .match   (pres_match[a*P +: P]),
      .rd_bits (pres_rd_unused)
    );

    afecam_array #(.NSUB(NSUB), .P(P), .Q(Q)) u_next (
      .clk     (clk),
      .rst_n   (rst_n),
      .wr_en   (is_wr && ssel[2] && asel[a]),
      .row_sel (rsel),
      .wr_data (next_wd),
      .pre     (is_pre && ssel[2] && act_rd),
      .ph      (op == CAM_SEARCH),
      .sl_care (next_care),
      .sl_val  (next_val),
      .pre_en  ('1),
      .rd_row  (rd_row_q),
      .match   (next_match[a*P +: P]),
      .rd_bits (next_rd_bits[a])
    );

    conf_subarray #(.P(P), .Q(Q)) u_conf (
      .clk        (clk),
      .rst_n      (rst_n),
      .wr_en      (is_wr && ssel[1] && asel[a]),
      .wr_row     (rsel),
      .wr_data    (cf_wd),
      .pre        ((is_pre && ssel[1] && act_rd) || mm_step),
      .ph         (mm_step ? mm_max : (op == CAM_SEARCH)),
      .sl_care    (cf_care),
      .sl_val     (cf_val),
      .rd_row     (rd_row_q),
      .rd_bit     (conf_rd_bit[a]),
      .cand_load  (op == CAM_MM_LOAD),
      .cand_in    (mm_init[a*P +: P]),
      .mm_active  (mm_step),
      .mm_max     (mm_max),
      .mm_apply   (op == CAM_MM_APPLY),
      .glob_hit   (mm_glob_hit),
      .any_hit    (conf_any[a]),
      .cand       (conf_cand[a]),
      .addr_valid (pv_unused),
      .addr       (pa_unused)
    );
    assign mm_cand[a*P +: P] = conf_cand[a];
  end

  assign mm_glob_hit = |conf_any;

  // ------------------------------------------------------ SIPO register block
  for (genvar k = 0; k < NSUB; k++) begin : g_sipo
    sipo_register #(.Q(Q)) u_sipo (
      .clk   (clk),
      .rst_n (rst_n),
      .clr   (op == CAM_RD_CLR),
      .shift (rd_next_q),
      .sin   (next_rd_bits[rd_arr_q][k]),
      .pout  (pred[k*Q +: Q])
    );
  end

  sipo_register #(.Q(Q)) u_sipo_conf (
    .clk   (clk),
    .rst_n (rst_n),
    .clr   (op == CAM_RD_CLR),
    .shift (rd_conf_q),
    .sin   (conf_rd_bit[rd_arr_q]),
    .pout  (conf_rd)
  );
endmodule
