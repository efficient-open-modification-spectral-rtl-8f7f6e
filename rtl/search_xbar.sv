// search_xbar: behavioural model of the RRAM crossbar used for in-memory
// Hamming similarity search. It stands for an analog 1T1R array with drivers
// and voltage ADCs, so it is a model, not a circuit.
//
// Contents: column j holds reference hypervector j, stored vertically: the
// pair of rows for dimension d holds element R_j[d] in {-1,+1} as a
// differential pair (g+ = gmax, g- = 0 for +1, the reverse for -1). Storage
// is kept column by column, one ROWS-bit word per column, bit 1 = +1.
//
// Operation per sensing cycle (rd_en): the NACT dimensions of block blk
// (dimensions blk*NACT .. blk*NACT+NACT-1) are activated and driven with the
// query bits bl_pos (1 = +1). Every column's source line then settles to a
// voltage linear in sum_d Q[d]*R_j[d] over those dimensions, and each column's
// voltage_adc model turns it into a code (MVM style: all columns valid each
// cycle). Codes are registered: they appear one clock after rd_en.
//
// Programming (prog_en) writes one whole column (one reference) at once, with
// ideal cells. What follows the paper: vertical reference storage, differential
// pairs, signed BL drive, 64 active rows per cycle. This design's choices: the
// contiguous row blocks, one ADC per column, ideal cells and the array size.
module search_xbar #(
  parameter int unsigned ROWS     = 8192,
  parameter int unsigned COLS     = 128,
  parameter int unsigned NACT     = 64,
  parameter int unsigned ADC_BITS = 8,
  localparam int unsigned CW      = (COLS > 1) ? $clog2(COLS) : 1,
  localparam int unsigned NBLK    = ROWS / NACT,
  localparam int unsigned BW      = (NBLK > 1) ? $clog2(NBLK) : 1
) (
  input  logic                          clk,
  input  logic                          prog_en,
  input  logic [CW-1:0]                 prog_col,
  input  logic [ROWS-1:0]               prog_data,
  input  logic                          rd_en,
  input  logic [BW-1:0]                 blk,
  input  logic [NACT-1:0]               bl_pos,
  output logic [COLS-1:0][ADC_BITS-1:0] code
);
  localparam int unsigned MAC_W = $clog2(NACT + 1) + 1;
  localparam int unsigned N_W   = $clog2(NACT + 1);

  logic [ROWS-1:0] cols [COLS];

  always_ff @(posedge clk) begin
    if (prog_en) cols[prog_col] <= prog_data;
  end

  logic signed [MAC_W-1:0] mac [COLS];
  logic [NACT-1:0]         seg [COLS];

  always_comb begin
    for (int j = 0; j < COLS; j++) begin
      seg[j] = cols[j][blk*NACT +: NACT];
      // X*W is +1 where query and reference agree and -1 where they differ
      mac[j] = MAC_W'(NACT) - MAC_W'(2 * $countones(seg[j] ^ bl_pos));
    end
  end

  logic [COLS-1:0][ADC_BITS-1:0] code_d;

  for (genvar j = 0; j < COLS; j++) begin : g_adc
    logic signed [ADC_BITS-1:0] cd;
    voltage_adc #(.ADC_BITS(ADC_BITS), .WMAX(1), .NACT(NACT), .MAC_W(MAC_W), .N_W(N_W)) u_adc (
      .mac(mac[j]), .n_act(N_W'(NACT)), .code(cd));
    assign code_d[j] = cd;
  end

  always_ff @(posedge clk) begin
    if (rd_en) code <= code_d;
  end
endmodule
