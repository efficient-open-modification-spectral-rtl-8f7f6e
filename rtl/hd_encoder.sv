// hd_encoder: ID-level encoding controller. It turns the peaks of one spectrum
// into a binary hypervector h = Sign(sum_i ID_i * LV_i) using the enc_xbar
// crossbar for the multiply-accumulate.
//
// How it works. Peaks arrive as (m/z bin, quantized intensity level) pairs and
// are kept in a peak buffer of up to MAX_PEAKS entries; further peaks of the
// same spectrum are dropped and raise `overflow`. After the last peak the
// controller walks the NCHUNK = D/CHUNK chunks. For each chunk it activates the
// rows (pbin) of up to NACT peaks at once and drives each row's bit line with
// the chunk's bit of that peak's level hypervector (from lv_gen). Because every
// bit of a level hypervector is constant inside a chunk, the CHUNK sensed
// columns all hold valid element-wise MACs in that one cycle. A spectrum with
// more than NACT peaks takes ceil(P/NACT) batches per chunk; each batch's ADC
// code is multiplied by its row count N (the SL voltage is normalised by N)
// and added into CHUNK accumulators. After the chunk's last batch the sign of
// each accumulator gives CHUNK bits of h (bit 1 = +1, Sign(0) = +1).
//
// What follows the paper: Eq. (1), ID vectors stored in the array rows, binary
// level vectors fed chunk by chunk, up to 64 active rows, Sign() quantization.
// This design's choices: batching beyond 64 peaks with the N weighting, the
// chunk-outer/batch-inner loop order, Sign(0) = +1, the overflow rule.
//
// Interface and timing. Peaks use valid/ready (pk_ready is high while the
// controller is loading); pk_last marks the last peak. Encoding then takes
// NCHUNK * max(1, ceil(P/NACT)) crossbar cycles plus one cycle of latency,
// after which hv_valid pulses for one cycle and hv holds the result until the
// next spectrum finishes. Crossbar codes (x_code) are expected one clock after
// x_rd_en, as enc_xbar provides them.
module hd_encoder #(
  parameter int unsigned NBINS     = 256,
  parameter int unsigned D         = 8192,
  parameter int unsigned Q         = 16,
  parameter int unsigned CHUNK     = 64,
  parameter int unsigned NACT      = 64,
  parameter int unsigned MAX_PEAKS = 150,
  parameter int unsigned ADC_BITS  = 8,
  parameter int unsigned SEED      = 1,
  localparam int unsigned BINW     = $clog2(NBINS),
  localparam int unsigned LVW      = (Q > 1) ? $clog2(Q) : 1,
  localparam int unsigned NCHUNK   = D / CHUNK,
  localparam int unsigned CKW      = (NCHUNK > 1) ? $clog2(NCHUNK) : 1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // peak stream
  input  logic                           pk_valid,
  output logic                           pk_ready,
  input  logic [BINW-1:0]                pk_bin,
  input  logic [LVW-1:0]                 pk_level,
  input  logic                           pk_last,
  // result
  output logic                           hv_valid,
  output logic [D-1:0]                   hv,
  output logic                           overflow,
  output logic                           busy,
  // encoding crossbar
  output logic                           x_rd_en,
  output logic [NACT-1:0]                x_wl_en,
  output logic [NACT-1:0][BINW-1:0]      x_wl_row,
  output logic [NACT-1:0]                x_bl_pos,
  output logic [CKW-1:0]                 x_grp,
  input  logic [CHUNK-1:0][ADC_BITS-1:0] x_code
);
  localparam int unsigned NBMAX = (MAX_PEAKS + NACT - 1) / NACT;
  localparam int unsigned BUF   = NBMAX * NACT;
  localparam int unsigned PW    = $clog2(MAX_PEAKS + 1);
  localparam int unsigned BTW   = (NBMAX > 1) ? $clog2(NBMAX) : 1;
  localparam int unsigned NW    = $clog2(NACT + 1);
  localparam int unsigned ACC_W = ADC_BITS + NW + $clog2(NBMAX + 1) + 1;

  typedef enum logic [1:0] {S_LOAD, S_RUN, S_DRAIN} state_e;
  state_e state;

  logic [BINW-1:0] pbin   [BUF];
  logic [LVW-1:0]  plvl [BUF];
  logic [PW-1:0]   npk;
  logic            fresh;        // next accepted peak starts a new spectrum

  logic [CKW-1:0]  c_idx;
  logic [BTW-1:0]  b_idx;
  logic [BTW-1:0]  b_last;       // index of the last batch of this spectrum

  // stage-2 (accumulate) registers, one cycle behind the issue
  logic            s2_valid, s2_last;
  logic [CKW-1:0]  s2_c;
  logic [NW-1:0]   s2_n;
  logic signed [ACC_W-1:0] acc [CHUNK];

  assign pk_ready = (state == S_LOAD);
  assign busy     = (state != S_LOAD);

  // ---- issue stage: drive the crossbar for chunk c_idx, batch b_idx ----
  logic [Q-1:0] lvbits;
  lv_gen #(.D(D), .Q(Q), .CHUNK(CHUNK), .SEED(SEED)) u_lv (.chunk(c_idx), .bits(lvbits));

  logic [NW-1:0] n_issue;
  always_comb begin
    x_rd_en = (state == S_RUN);
    x_grp   = c_idx;
    n_issue = '0;
    for (int i = 0; i < NACT; i++) begin
      int unsigned k;
      k = int'(b_idx) * NACT + i;
      x_wl_en[i]  = (state == S_RUN) && (k < int'(npk));
      x_wl_row[i] = pbin[k];
      x_bl_pos[i] = lvbits[plvl[k]];
      n_issue    += NW'(x_wl_en[i]);
    end
  end

  // ---- control ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_LOAD;
      npk      <= '0;
      fresh    <= 1'b1;
      overflow <= 1'b0;
      c_idx    <= '0;
      b_idx    <= '0;
      b_last   <= '0;
      s2_valid <= 1'b0;
      s2_last  <= 1'b0;
      s2_c     <= '0;
      s2_n     <= '0;
      hv_valid <= 1'b0;
    end else begin
      hv_valid <= 1'b0;
      s2_valid <= 1'b0;
      unique case (state)
        S_LOAD: if (pk_valid) begin
          logic [PW-1:0] cnt;
          cnt = fresh ? '0 : npk;
          if (fresh) overflow <= 1'b0;
          if (int'(cnt) < MAX_PEAKS) begin
            cnt = cnt + 1'b1;
          end else begin
            overflow <= 1'b1;
          end
          npk   <= cnt;
          fresh <= pk_last;
          if (pk_last) begin
            state  <= S_RUN;
            c_idx  <= '0;
            b_idx  <= '0;
            b_last <= (cnt == 0) ? '0 : BTW'((int'(cnt) - 1) / NACT);
          end
        end
        S_RUN: begin
          s2_valid <= 1'b1;
          s2_last  <= (b_idx == b_last);
          s2_c     <= c_idx;
          s2_n     <= n_issue;
          if (b_idx == b_last) begin
            b_idx <= '0;
            if (int'(c_idx) == NCHUNK - 1) state <= S_DRAIN;
            else c_idx <= c_idx + 1'b1;
          end else begin
            b_idx <= b_idx + 1'b1;
          end
        end
        S_DRAIN: begin
          if (!s2_valid) begin
            state    <= S_LOAD;
            hv_valid <= 1'b1;
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // peak buffer writes (a peak past MAX_PEAKS is not stored)
  always_ff @(posedge clk) begin
    if (state == S_LOAD && pk_valid) begin
      int unsigned k;
      k = fresh ? 0 : int'(npk);
      if (k < MAX_PEAKS) begin
        pbin[k]   <= pk_bin;
        plvl[k] <= pk_level;
      end
    end
  end

  // ---- accumulate stage ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < CHUNK; k++) acc[k] <= '0;
      hv <= '0;
    end else if (s2_valid) begin
      for (int k = 0; k < CHUNK; k++) begin
        logic signed [ACC_W-1:0] sum;
        sum = acc[k] + ACC_W'($signed(x_code[k])) * $signed({1'b0, s2_n});
        if (s2_last) begin
          hv[int'(s2_c) * CHUNK + k] <= (sum >= 0);
          acc[k] <= '0;
        end else begin
          acc[k] <= sum;
        end
      end
    end
  end

  // the peak stream must hold its data while stalled
  property p_pk_hold;
    @(posedge clk) disable iff (!rst_n) pk_valid && !pk_ready |=> pk_valid && $stable(pk_bin) && $stable(pk_level) && $stable(pk_last);
  endproperty
  a_pk_hold: assert property (p_pk_hold);
endmodule
