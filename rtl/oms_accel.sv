// oms_accel: top level of the in-memory open-modification-search accelerator.
//
// The accelerator turns spectra (lists of m/z-bin peaks with quantized
// intensities) into binary hypervectors in an RRAM crossbar, keeps references
// in a second crossbar and queries in multi-level-cell storage, and finds for a
// query the most similar reference by an in-memory dot product:
//
//   ID port --weight_mapper--> enc_xbar <--> hd_encoder --+--> search_xbar (reference columns)
//                                                          +--> query_store (query slots)
//   query_store --> hamming_search <--> search_xbar --> best reference, score
//
// Data flow (the paper's): spectra are encoded in memory, encoded hypervectors
// are stored, then similarity search runs. Preprocessing of raw spectra and the
// FDR filter on the matches are host tasks and not part of this design.
//
// Interface (this design's choice).
//  * ID programming: id_wr_en writes CHUNK signed ID elements (-4..-1, 1..4 for
//    ID_BITS = 3) of m/z bin id_row, chunk id_grp, through the weight mappers
//    into the encoding array. id_illegal flags (one cycle later) a write that
//    held an element outside the set; its illegal cells are written as level 0.
//  * Commands (valid/ready, one at a time): OP_ENC_QUERY arg=slot encodes the
//    next spectrum on the peak port into query slot `arg`; OP_ENC_REF arg=col
//    encodes it into reference column `arg`; OP_SEARCH arg=slot searches that
//    stored query over reference columns 0..ref_count-1 (ref_count is taken
//    with the command).
//  * Peaks (valid/ready, pk_last ends a spectrum) are accepted only while an
//    encode command runs.
//  * res_valid pulses when a command ends; res_op says which. For encodes
//    enc_hv holds the hypervector and enc_overflow whether peaks were dropped;
//    for searches res_best_idx / res_best_score hold the result.
// Timing: encode = peaks + NCHUNK*ceil(P/NACT) + 2 cycles; search = 2 (store
// read) + D/NACT + 3 cycles.
// Lint note: rst_n is the asynchronous reset of every flop and also the
// disable condition of the assertions, which is why lint sees it used as a
// synchronous signal too; the assertions generate no logic. The store's
// rd_cells observation port is left open here on purpose.
module oms_accel
  import oms_pkg::*;
#(
  parameter int unsigned D         = 8192,
  parameter int unsigned NBINS     = 256,
  parameter int unsigned Q         = 16,
  parameter int unsigned CHUNK     = 64,
  parameter int unsigned NACT      = 64,
  parameter int unsigned ID_BITS   = 3,
  parameter int unsigned CELL_BITS = 3,
  parameter int unsigned NREF      = 128,
  parameter int unsigned SLOTS     = 1024,
  parameter int unsigned MAX_PEAKS = 150,
  parameter int unsigned ADC_BITS  = 8,
  parameter int unsigned SEED      = 1,
  localparam int unsigned BINW     = $clog2(NBINS),
  localparam int unsigned LVW      = (Q > 1) ? $clog2(Q) : 1,
  localparam int unsigned NCHUNK   = D / CHUNK,
  localparam int unsigned CKW      = (NCHUNK > 1) ? $clog2(NCHUNK) : 1,
  localparam int unsigned CW       = (NREF > 1) ? $clog2(NREF) : 1,
  localparam int unsigned SW       = (SLOTS > 1) ? $clog2(SLOTS) : 1,
  localparam int unsigned AW       = (SW > CW) ? SW : CW,
  localparam int unsigned NBLK     = D / NACT,
  localparam int unsigned SCORE_W  = ADC_BITS + $clog2(NBLK + 1) + 1
) (
  input  logic                                clk,
  input  logic                                rst_n,
  // ID hypervector programming
  input  logic                                id_wr_en,
  input  logic [BINW-1:0]                     id_row,
  input  logic [CKW-1:0]                      id_grp,
  input  logic [CHUNK-1:0][ID_BITS:0]         id_w,
  output logic                                id_illegal,
  // commands
  input  logic                                cmd_valid,
  output logic                                cmd_ready,
  input  op_e                                 cmd_op,
  input  logic [AW-1:0]                       cmd_arg,
  input  logic [CW:0]                         ref_count,
  // peaks of the spectrum being encoded
  input  logic                                pk_valid,
  output logic                                pk_ready,
  input  logic [BINW-1:0]                     pk_bin,
  input  logic [LVW-1:0]                      pk_level,
  input  logic                                pk_last,
  // results
  output logic                                res_valid,
  output op_e                                 res_op,
  output logic [CW-1:0]                       res_best_idx,
  output logic signed [SCORE_W-1:0]           res_best_score,
  output logic [D-1:0]                        enc_hv,
  output logic                                enc_overflow,
  output logic                                busy
);
  typedef enum logic [2:0] {T_IDLE, T_ENC, T_RD, T_RDW, T_SRCH} tstate_e;
  tstate_e state;
  op_e             op_q;
  logic [AW-1:0]   arg_q;
  logic [CW:0]     nref_q;

  // ---------------- ID programming path ----------------
  logic [CHUNK-1:0][ID_BITS-1:0] id_level;
  logic [CHUNK-1:0]              id_legal;
  for (genvar c = 0; c < CHUNK; c++) begin : g_map
    logic [ID_BITS:0] gp, gn;
    weight_mapper #(.WBITS(ID_BITS)) u_map (
      .w($signed(id_w[c])), .level(id_level[c]), .g_pos(gp), .g_neg(gn), .legal(id_legal[c]));
    // The two cells of a differential pair always add up to gmax
    // (2*Wmax units): g+ and g- sit symmetrically about gmax/2.
    a_pair_sum: assert property (@(posedge clk) disable iff (!rst_n)
      id_wr_en && id_legal[c] |-> (int'(gp) + int'(gn) == (2 << (ID_BITS - 1))));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) id_illegal <= 1'b0;
    else        id_illegal <= id_wr_en && !(&id_legal);
  end

  // ---------------- encoder + encoding crossbar ----------------
  logic                           e_rd_en;
  logic [NACT-1:0]                e_wl_en;
  logic [NACT-1:0][BINW-1:0]      e_wl_row;
  logic [NACT-1:0]                e_bl_pos;
  logic [CKW-1:0]                 e_grp;
  logic [CHUNK-1:0][ADC_BITS-1:0] e_code;
  logic                           enc_pk_ready, enc_hv_valid, enc_busy;
  logic                           last_taken, pk_open;

  enc_xbar #(.LROWS(NBINS), .COLS(D), .WBITS(ID_BITS), .NACT(NACT), .GROUP(CHUNK),
             .ADC_BITS(ADC_BITS)) u_enc_xbar (
    .clk, .prog_en(id_wr_en), .prog_row(id_row), .prog_grp(id_grp), .prog_level(id_level),
    .rd_en(e_rd_en), .wl_en(e_wl_en), .wl_row(e_wl_row), .bl_pos(e_bl_pos), .grp_sel(e_grp),
    .code(e_code));

  hd_encoder #(.NBINS(NBINS), .D(D), .Q(Q), .CHUNK(CHUNK), .NACT(NACT), .MAX_PEAKS(MAX_PEAKS),
               .ADC_BITS(ADC_BITS), .SEED(SEED)) u_encoder (
    .clk, .rst_n,
    .pk_valid(pk_valid && pk_open), .pk_ready(enc_pk_ready),
    .pk_bin, .pk_level, .pk_last,
    .hv_valid(enc_hv_valid), .hv(enc_hv), .overflow(enc_overflow), .busy(enc_busy),
    .x_rd_en(e_rd_en), .x_wl_en(e_wl_en), .x_wl_row(e_wl_row), .x_bl_pos(e_bl_pos),
    .x_grp(e_grp), .x_code(e_code));

  // The peak port is open from the encode command until its last peak; it
  // stays closed while the encoder works and in the cycle it reports, so an
  // early peak of the next spectrum waits for its own command.
  assign pk_open  = (state == T_ENC) && !last_taken;
  assign pk_ready = enc_pk_ready && pk_open;

  // ---------------- query storage ----------------
  logic         qs_rd_valid;
  logic [D-1:0] qs_rd_hv;

  query_store #(.D(D), .CELL_BITS(CELL_BITS), .SLOTS(SLOTS)) u_qstore (
    .clk, .rst_n,
    .wr_en(enc_hv_valid && op_q == OP_ENC_QUERY && state == T_ENC), .wr_slot(SW'(arg_q)), .wr_hv(enc_hv),
    .rd_en(state == T_RD), .rd_slot(SW'(arg_q)),
    .rd_valid(qs_rd_valid), .rd_hv(qs_rd_hv),
    .rd_cells());  // the cell integers are only an observation port of the store

  // ---------------- search + search crossbar ----------------
  logic                          s_rd_en;
  logic [(NBLK > 1 ? $clog2(NBLK) : 1)-1:0] s_blk;
  logic [NACT-1:0]               s_bl_pos;
  logic [NREF-1:0][ADC_BITS-1:0] s_code;
  logic                          s_done, s_busy;
  logic [CW-1:0]                 s_idx;
  logic signed [SCORE_W-1:0]     s_score;

  search_xbar #(.ROWS(D), .COLS(NREF), .NACT(NACT), .ADC_BITS(ADC_BITS)) u_search_xbar (
    .clk,
    .prog_en(enc_hv_valid && op_q == OP_ENC_REF && state == T_ENC), .prog_col(CW'(arg_q)), .prog_data(enc_hv),
    .rd_en(s_rd_en), .blk(s_blk), .bl_pos(s_bl_pos), .code(s_code));

  hamming_search #(.D(D), .NREF(NREF), .NACT(NACT), .ADC_BITS(ADC_BITS)) u_search (
    .clk, .rst_n, .start(state == T_RDW && qs_rd_valid), .query(qs_rd_hv), .ref_count(nref_q),
    .busy(s_busy), .done(s_done), .best_idx(s_idx), .best_score(s_score),
    .x_rd_en(s_rd_en), .x_blk(s_blk), .x_bl_pos(s_bl_pos), .x_code(s_code));

  assign res_best_idx   = s_idx;
  assign res_best_score = s_score;

  // ---------------- command sequencer ----------------
  assign cmd_ready = (state == T_IDLE);
  assign busy      = (state != T_IDLE) || enc_busy || s_busy;
  assign res_op    = op_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= T_IDLE;
      op_q      <= OP_ENC_QUERY;
      arg_q     <= '0;
      nref_q    <= '0;
      res_valid  <= 1'b0;
      last_taken <= 1'b0;
    end else begin
      res_valid <= 1'b0;
      if (pk_valid && pk_ready && pk_last) last_taken <= 1'b1;
      unique case (state)
        T_IDLE: if (cmd_valid) begin
          op_q  <= cmd_op;
          arg_q <= cmd_arg;
          nref_q <= ref_count;
          state <= (cmd_op == OP_SEARCH) ? T_RD : T_ENC;
          last_taken <= 1'b0;
        end
        T_ENC:  if (enc_hv_valid) begin
          res_valid <= 1'b1;
          state     <= T_IDLE;
        end
        T_RD:   state <= T_RDW;
        T_RDW:  if (qs_rd_valid) state <= T_SRCH;
        T_SRCH: if (s_done) begin
          res_valid <= 1'b1;
          state     <= T_IDLE;
        end
        default: state <= T_IDLE;
      endcase
    end
  end

  a_cmd_hold: assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid && !cmd_ready |=> cmd_valid && $stable(cmd_op) && $stable(cmd_arg))
    else $error("oms_accel: command changed while stalled");
  a_cmd_legal: assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid && cmd_ready |-> cmd_op inside {OP_ENC_QUERY, OP_ENC_REF, OP_SEARCH})
    else $error("oms_accel: unknown command");
endmodule
