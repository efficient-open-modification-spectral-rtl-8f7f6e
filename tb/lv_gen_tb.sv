// lv_gen_tb: checks the chunked level hypervectors at the default size
// (D = 8192, Q = 16, CHUNK = 64). For every pair of neighbouring levels the
// number of differing chunks must be D/(2Q)/CHUNK, the distance of l_j from l_0
// must grow as j*D/(2Q) bits, and l_0 must equal an independently computed
// xorshift32 pattern of the seed.
module lv_gen_tb;
  localparam int D = 8192, Q = 16, CHUNK = 64, NCHUNK = D / CHUNK;
  localparam int F = D / (2 * Q * CHUNK);
  int checks = 0, failures = 0;

  logic [$clog2(NCHUNK)-1:0] chunk;
  logic [Q-1:0] bits;
  lv_gen #(.D(D), .Q(Q), .CHUNK(CHUNK), .SEED(1)) dut (.chunk(chunk), .bits(bits));

  logic [Q-1:0] tab [NCHUNK];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] s;
    int ones;
    for (int c = 0; c < NCHUNK; c++) begin
      chunk = 7'(c);
      #1;
      tab[c] = bits;
    end
    s = 32'd1;
    ones = 0;
    for (int c = 0; c < NCHUNK; c++) begin
      s = s ^ (s << 13); s = s ^ (s >> 17); s = s ^ (s << 5);
      check(tab[c][0] == s[31], $sformatf("l0 chunk %0d", c));
      ones += int'(tab[c][0]);
    end
    check(ones > NCHUNK / 4 && ones < 3 * NCHUNK / 4, "l0 roughly balanced");
    for (int j = 1; j < Q; j++) begin
      int dn, d0;
      dn = 0; d0 = 0;
      for (int c = 0; c < NCHUNK; c++) begin
        dn += int'(tab[c][j] != tab[c][j-1]);
        d0 += int'(tab[c][j] != tab[c][0]);
      end
      check(dn * CHUNK == D / (2 * Q), $sformatf("l%0d vs l%0d: %0d chunks", j, j - 1, dn));
      check(d0 == j * F, $sformatf("l%0d vs l0: %0d chunks", j, d0));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
