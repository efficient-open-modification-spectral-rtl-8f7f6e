// enc_xbar: behavioural model of the RRAM crossbar used for in-memory encoding.
// It stands for an analog 1T1R array with word-line and bit-line drivers and
// voltage ADCs, so it is a model, not a circuit.
//
// Contents: logical row r holds the ID (position) hypervector of m/z bin r,
// stored horizontally: column d holds element ID_r[d] as a differential pair of
// cells (two physical rows, one column). Each element is kept as the level index
// of its g+ cell (WBITS bits, see oms_pkg); g- is the complementary level.
//
// Operation per sensing cycle (rd_en): up to NACT rows are activated. Each
// active row i is given by its address wl_row[i] (standing for the decoded word
// line) and an input bit bl_pos[i]. For an input +1 the pair's bit lines go to
// Vref+Vpulse and Vref-Vpulse, for -1 the reverse, so row i contributes
// +W or -W to every column. The GROUP columns of chunk grp_sel are sensed:
// for each, the ideal MAC sum_i(+-W) over the active rows and the active row
// count N go to a voltage_adc model. Only the columns of the chunk that the
// inputs belong to give useful results, which is why one chunk is sensed.
// Codes are registered: they appear one clock after rd_en.
//
// Programming (prog_en) writes GROUP cells of one row at once, with no
// write-verify or relaxation modelled. What follows the paper: horizontal ID
// storage, differential pairs, signed BL drive, chunk-wide sensing, 64 active
// rows. This design's choices: the address-list form of the WL inputs, one ADC
// per sensed column, ideal (error-free) cells, and the array size.
module enc_xbar #(
  parameter int unsigned LROWS    = 256,
  parameter int unsigned COLS     = 8192,
  parameter int unsigned WBITS    = 3,
  parameter int unsigned NACT     = 64,
  parameter int unsigned GROUP    = 64,
  parameter int unsigned ADC_BITS = 8,
  localparam int unsigned RW      = $clog2(LROWS),
  localparam int unsigned NGRP    = COLS / GROUP,
  localparam int unsigned GW      = (NGRP > 1) ? $clog2(NGRP) : 1
) (
  input  logic                           clk,
  // programming
  input  logic                           prog_en,
  input  logic [RW-1:0]                  prog_row,
  input  logic [GW-1:0]                  prog_grp,
  input  logic [GROUP-1:0][WBITS-1:0]    prog_level,
  // sensing
  input  logic                           rd_en,
  input  logic [NACT-1:0]                wl_en,
  input  logic [NACT-1:0][RW-1:0]        wl_row,
  input  logic [NACT-1:0]                bl_pos,
  input  logic [GW-1:0]                  grp_sel,
  output logic [GROUP-1:0][ADC_BITS-1:0] code
);
  import oms_pkg::*;

  localparam int unsigned WMAX  = 1 << (WBITS - 1);
  localparam int unsigned MAC_W = $clog2(NACT * WMAX + 1) + 1;
  localparam int unsigned N_W   = $clog2(NACT + 1);

  logic [COLS*WBITS-1:0] cells [LROWS];

  always_ff @(posedge clk) begin
    if (prog_en) cells[prog_row][prog_grp*GROUP*WBITS +: GROUP*WBITS] <= prog_level;
  end

  logic signed [MAC_W-1:0]    mac  [GROUP];
  logic        [N_W-1:0]      nact;
  logic [GROUP-1:0][WBITS-1:0] slice [NACT];

  always_comb begin
    nact = '0;
    for (int i = 0; i < NACT; i++) begin
      nact += N_W'(wl_en[i]);
      slice[i] = cells[wl_row[i]][grp_sel*GROUP*WBITS +: GROUP*WBITS];
    end
    for (int c = 0; c < GROUP; c++) begin
      mac[c] = '0;
      for (int i = 0; i < NACT; i++) begin
        if (wl_en[i]) begin
          if (bl_pos[i]) mac[c] += MAC_W'(level_to_weight(32'(slice[i][c]), WBITS));
          else           mac[c] -= MAC_W'(level_to_weight(32'(slice[i][c]), WBITS));
        end
      end
    end
  end

  logic [GROUP-1:0][ADC_BITS-1:0] code_d;

  for (genvar c = 0; c < GROUP; c++) begin : g_adc
    logic signed [ADC_BITS-1:0] cd;
    voltage_adc #(.ADC_BITS(ADC_BITS), .WMAX(WMAX), .NACT(NACT), .MAC_W(MAC_W), .N_W(N_W)) u_adc (
      .mac(mac[c]), .n_act(nact), .code(cd));
    assign code_d[c] = cd;
  end

  always_ff @(posedge clk) begin
    if (rd_en) code <= code_d;
  end
endmodule
