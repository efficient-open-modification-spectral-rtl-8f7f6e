// lv_gen: chunked level-hypervector generator for ID-level encoding.
//
// The Q level hypervectors l_0..l_{Q-1} have D bits divided into NCHUNK =
// D/CHUNK chunks, and every bit inside one chunk has the same value, so a
// level hypervector is fully described by one bit per chunk. l_0 is random and
// l_j is l_{j-1} with D/(2Q) further bits flipped, so neighbouring levels are
// more alike than distant ones (both rules are the paper's). Here the flips are
// whole chunks: F = D/(2Q*CHUNK) chunks per level step.
//
// Which chunks flip (this design's choice): chunk c has rank
// (c * RANK_MUL) mod NCHUNK, a permutation since RANK_MUL is odd and NCHUNK is
// a power of two, and it is flipped in l_j when rank < j*F. Hence l_j differs
// from l_0 in exactly j*F chunks and from l_{j-1} in exactly F chunks. l_0 is a
// fixed pseudo-random pattern from an xorshift32 sequence seeded with SEED,
// computed at elaboration.
//
// Interface: combinational. For chunk index `chunk` it returns bits[j], the
// value (1 = +1, 0 = -1) of level hypervector l_j in that chunk.
module lv_gen #(
  parameter int unsigned D        = 8192,
  parameter int unsigned Q        = 16,
  parameter int unsigned CHUNK    = 64,
  parameter int unsigned SEED     = 1,
  parameter int unsigned RANK_MUL = 37,
  localparam int unsigned NCHUNK  = D / CHUNK,
  localparam int unsigned CKW     = (NCHUNK > 1) ? $clog2(NCHUNK) : 1
) (
  input  logic [CKW-1:0] chunk,
  output logic [Q-1:0]   bits
);
  localparam int unsigned F = D / (2 * Q * CHUNK);

  function automatic logic [NCHUNK-1:0] make_l0(int unsigned seed);
    logic [31:0] s;
    logic [NCHUNK-1:0] v;
    s = (seed == 0) ? 32'h1 : seed;
    for (int i = 0; i < NCHUNK; i++) begin
      s = s ^ (s << 13);
      s = s ^ (s >> 17);
      s = s ^ (s << 5);
      v[i] = s[31];
    end
    return v;
  endfunction

  localparam logic [NCHUNK-1:0] L0 = make_l0(SEED);

  initial begin
    assert (F >= 1 && F * 2 * Q * CHUNK == D)
      else $error("lv_gen: D/(2Q) must be a positive multiple of CHUNK");
    assert ((NCHUNK & (NCHUNK - 1)) == 0 && RANK_MUL % 2 == 1)
      else $error("lv_gen: NCHUNK must be a power of two and RANK_MUL odd");
  end

  logic [CKW-1:0] rank;
  logic [31:0]    prod;

  always_comb begin
    prod = 32'(chunk) * 32'(RANK_MUL);
    rank = CKW'(prod % NCHUNK);
    for (int j = 0; j < Q; j++)
      bits[j] = L0[chunk] ^ (32'(rank) < 32'(j) * 32'(F));
  end
endmodule
