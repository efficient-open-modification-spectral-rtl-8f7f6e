// weight_mapper: maps one signed hypervector element W onto an MLC cell.
//
// Function: the differential mapping of the search and encoding arrays stores W
// in two cells of one column with g+ = (1 + W/Wmax) gmax/2 and
// g- = (1 - W/Wmax) gmax/2 (these two equations are the paper's). The outputs
// give both conductances in integer units of gmax/(2 Wmax), so g_pos = Wmax + W
// and g_neg = Wmax - W, together with the level index of the g+ cell that the
// crossbar models store (see oms_pkg for the index ordering, this design's own).
// `legal` is low for W = 0 or |W| > Wmax, which the element set does not contain.
//
// Interface: purely combinational. WBITS = 3 gives the 8-level cells and the
// 3-bit ID elements {-4..-1, 1..4}; WBITS = 1 gives binary {-1, +1}.
module weight_mapper #(
  parameter int unsigned WBITS = 3
) (
  input  logic signed [WBITS:0]   w,
  output logic        [WBITS-1:0] level,
  output logic        [WBITS:0]   g_pos,
  output logic        [WBITS:0]   g_neg,
  output logic                    legal
);
  localparam int signed WMAX = 1 <<< (WBITS - 1);
  localparam logic signed [WBITS+1:0] WMAX_S = (WBITS+2)'(WMAX);

  logic signed [WBITS+1:0] wx;

  always_comb begin
    wx    = (WBITS+2)'(w);
    legal = (wx != '0) && (wx <= WMAX_S) && (wx >= -WMAX_S);
    // results are in range whenever legal, so truncation is exact
    level = legal ? WBITS'((wx < 0) ? (wx + WMAX_S) : (wx + WMAX_S - (WBITS+2)'(1))) : '0;
    g_pos = legal ? (WBITS+1)'(WMAX_S + wx) : '0;
    g_neg = legal ? (WBITS+1)'(WMAX_S - wx) : '0;
  end
endmodule
