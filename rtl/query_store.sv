// query_store: multi-level-cell storage for query hypervectors.
//
// To pack as much as possible into the memory, queries are kept
// non-differentially: the D-bit hypervector (elements -1/+1) is cut into
// NCELLS = ceil(D/CELL_BITS) groups of CELL_BITS elements, each group is read
// as an unsigned integer h' (element -1 -> bit 0, +1 -> bit 1) and h' is the
// level programmed into one cell, conductance g = h'/h'max * gmax. With
// CELL_BITS = 2, (-1,-1) -> 0 ... (+1,+1) -> 3. This reshaping is the paper's;
// taking the first element of a group as the most significant bit of h' and
// padding a short last group with -1 elements are this design's choices.
// The cell array is a plain memory array standing in for the MLC RRAM; it
// stores ideal levels (no relaxation errors).
//
// Interface and timing. wr_en writes wr_hv into slot wr_slot at the clock edge.
// rd_en reads slot rd_slot: one clock later rd_valid is high, rd_hv holds the
// restored hypervector and rd_cells the stored per-cell integers h'
// (cell k in bits k*CELL_BITS +: CELL_BITS).
module query_store #(
  parameter int unsigned D         = 8192,
  parameter int unsigned CELL_BITS = 3,
  parameter int unsigned SLOTS     = 1024,
  localparam int unsigned NCELLS   = (D + CELL_BITS - 1) / CELL_BITS,
  localparam int unsigned SW       = (SLOTS > 1) ? $clog2(SLOTS) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          wr_en,
  input  logic [SW-1:0]                 wr_slot,
  input  logic [D-1:0]                  wr_hv,
  input  logic                          rd_en,
  input  logic [SW-1:0]                 rd_slot,
  output logic                          rd_valid,
  output logic [D-1:0]                  rd_hv,
  output logic [NCELLS*CELL_BITS-1:0]   rd_cells
);
  localparam int unsigned PADW = NCELLS * CELL_BITS;

  logic [PADW-1:0] mem [SLOTS];

  // pack: element e = k*CELL_BITS + b goes to bit (CELL_BITS-1-b) of cell k
  function automatic logic [PADW-1:0] pack(logic [D-1:0] h);
    logic [PADW-1:0] p;
    for (int k = 0; k < NCELLS; k++)
      for (int b = 0; b < CELL_BITS; b++)
        p[k*CELL_BITS + CELL_BITS-1-b] = (k * CELL_BITS + b < D) ? h[k*CELL_BITS + b] : 1'b0;
    return p;
  endfunction

  function automatic logic [D-1:0] unpack(logic [PADW-1:0] p);
    logic [D-1:0] h;
    for (int k = 0; k < NCELLS; k++)
      for (int b = 0; b < CELL_BITS; b++)
        if (k * CELL_BITS + b < D) h[k*CELL_BITS + b] = p[k*CELL_BITS + CELL_BITS-1-b];
    return h;
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_slot] <= pack(wr_hv);
    if (rd_en) rd_cells <= mem[rd_slot];
  end

  assign rd_hv = unpack(rd_cells);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= rd_en;
  end
endmodule
