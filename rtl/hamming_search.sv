// hamming_search: in-memory Hamming similarity search controller.
//
// How it works. A search starts with a query hypervector (D bits, 1 = +1). The
// controller feeds it into the search_xbar array NACT dimensions per cycle:
// block t drives the query bits t*NACT .. t*NACT+NACT-1 onto the bit lines of
// those rows. Every reference column then yields an ADC code for the partial
// dot product of that block, and NREF accumulators add the codes up over the
// D/NACT blocks. Since the hypervectors are binary, the dot product equals
// 2 * (Hamming similarity) - D, so the largest score marks the most similar
// reference. A final cycle scans the first ref_count accumulators and reports
// the index and score of the largest; ties go to the lower index.
//
// What follows the paper: references stored one per column, the query applied
// as BL inputs, 64 rows per cycle, Hamming similarity measured by dot product,
// the most similar reference as the result. This design's choices: the
// accumulation of ADC codes, the tie rule, the ref_count window, the timing.
//
// Interface and timing. `start` (while not busy) latches query and ref_count.
// The search takes D/NACT issue cycles, one cycle of crossbar latency and one
// argmax cycle; `done` then pulses for one cycle with best_idx and best_score,
// which stay valid until the next search ends. ref_count = 0 gives index 0 and
// the most negative score.
module hamming_search #(
  parameter int unsigned D        = 8192,
  parameter int unsigned NREF     = 128,
  parameter int unsigned NACT     = 64,
  parameter int unsigned ADC_BITS = 8,
  localparam int unsigned CW      = (NREF > 1) ? $clog2(NREF) : 1,
  localparam int unsigned NBLK    = D / NACT,
  localparam int unsigned BW      = (NBLK > 1) ? $clog2(NBLK) : 1,
  localparam int unsigned SCORE_W = ADC_BITS + $clog2(NBLK + 1) + 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [D-1:0]                  query,
  input  logic [CW:0]                   ref_count,
  output logic                          busy,
  output logic                          done,
  output logic [CW-1:0]                 best_idx,
  output logic signed [SCORE_W-1:0]     best_score,
  // search crossbar
  output logic                          x_rd_en,
  output logic [BW-1:0]                 x_blk,
  output logic [NACT-1:0]               x_bl_pos,
  input  logic [NREF-1:0][ADC_BITS-1:0] x_code
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN, S_PICK} state_e;
  state_e state;

  logic [D-1:0]   q;
  logic [CW:0]    nref_q;
  logic [BW-1:0]  blk;
  logic           s2_valid;
  logic signed [SCORE_W-1:0] acc [NREF];

  assign busy     = (state != S_IDLE);
  assign x_rd_en  = (state == S_RUN);
  assign x_blk    = blk;
  assign x_bl_pos = q[blk*NACT +: NACT];

  // argmax over the valid columns
  logic [CW-1:0]             arg_i;
  logic signed [SCORE_W-1:0] arg_v;
  always_comb begin
    arg_i = '0;
    arg_v = {1'b1, {(SCORE_W-1){1'b0}}};
    for (int j = 0; j < NREF; j++) begin
      if (j < int'(nref_q) && (j == 0 || acc[j] > arg_v)) begin
        arg_i = CW'(j);
        arg_v = acc[j];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      q          <= '0;
      nref_q     <= '0;
      blk        <= '0;
      s2_valid   <= 1'b0;
      done       <= 1'b0;
      best_idx   <= '0;
      best_score <= '0;
      for (int j = 0; j < NREF; j++) acc[j] <= '0;
    end else begin
      done     <= 1'b0;
      s2_valid <= (state == S_RUN);
      if (s2_valid)
        for (int j = 0; j < NREF; j++) acc[j] <= acc[j] + SCORE_W'($signed(x_code[j]));
      unique case (state)
        S_IDLE: if (start) begin
          q      <= query;
          nref_q <= ref_count;
          blk    <= '0;
          state  <= S_RUN;
          for (int j = 0; j < NREF; j++) acc[j] <= '0;
        end
        S_RUN: begin
          if (int'(blk) == NBLK - 1) state <= S_DRAIN;
          else blk <= blk + 1'b1;
        end
        S_DRAIN: if (!s2_valid) state <= S_PICK;
        S_PICK: begin
          best_idx   <= arg_i;
          best_score <= arg_v;
          done       <= 1'b1;
          state      <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("hamming_search: start while busy");
endmodule
