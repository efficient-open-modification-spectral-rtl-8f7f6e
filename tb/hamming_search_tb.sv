// hamming_search_tb: runs the search controller with a real search_xbar at a
// reduced size (D = 512, 8 reference columns, 64 rows per cycle). References
// are random; queries are references with some bits flipped, random vectors,
// and a reference stored twice (a tie, which must go to the lower column). The
// expected scores are computed here: for each 64-dimension block,
// mac = agreements - disagreements, code = floor(mac*127/64), score = sum of
// codes; the result is the largest score among the first ref_count columns.
// Also checks that done is set by the D/64 + 3-rd clock edge after the edge
// that takes start (so it is seen high at the edge after that).
module hamming_search_tb;
  import oms_model_pkg::*;
  localparam int D = 512, NREF = 8, NACT = 64, NBLK = D / NACT, SW = 8 + $clog2(NBLK + 1) + 1;
  int checks = 0, failures = 0, n_tie = 0, n_window = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic prog_en = 0;
  logic [2:0] prog_col = '0;
  logic [D-1:0] prog_data = '0;
  logic start = 0;
  logic [D-1:0] query = '0;
  logic [3:0] ref_count = '0;
  logic busy, done;
  logic [2:0] best_idx;
  logic signed [SW-1:0] best_score;
  logic x_rd_en;
  logic [2:0] x_blk;
  logic [NACT-1:0] x_bl_pos;
  logic [NREF-1:0][7:0] x_code;

  hamming_search #(.D(D), .NREF(NREF), .NACT(NACT), .ADC_BITS(8)) dut (
    .clk, .rst_n, .start, .query, .ref_count, .busy, .done, .best_idx, .best_score,
    .x_rd_en, .x_blk, .x_bl_pos, .x_code);
  search_xbar #(.ROWS(D), .COLS(NREF), .NACT(NACT), .ADC_BITS(8)) xbar (
    .clk, .prog_en, .prog_col, .prog_data, .rd_en(x_rd_en), .blk(x_blk), .bl_pos(x_bl_pos), .code(x_code));

  logic [D-1:0] refs [NREF];
  int cyc = 0, t_start = 0, t_done = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && start && !busy) t_start <= cyc;
    if (rst_n && done) t_done <= cyc;
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int j = 0; j < NREF; j++) begin
      for (int i = 0; i < D; i++) refs[j][i] = 1'($urandom);
      if (j == 6) refs[j] = refs[2];   // duplicate: a tie between 2 and 6
      @(negedge clk);
      prog_en = 1; prog_col = 3'(j); prog_data = refs[j];
    end
    @(negedge clk) prog_en = 0;
    for (int t = 0; t < 40; t++) begin
      logic [D-1:0] q;
      int nr, src, bi, bs;
      int sc [NREF];
      src = int'($urandom_range(NREF - 1));
      if (t == 0) src = 2;
      q = refs[src];
      for (int f = 0; f < int'($urandom_range(D / 3)); f++) q[$urandom_range(D - 1)] ^= 1'b1;
      if (t % 7 == 6) for (int i = 0; i < D; i++) q[i] = 1'($urandom);
      nr = (t % 5 == 4) ? 1 + int'($urandom_range(NREF - 1)) : NREF;
      if (t == 0) nr = NREF;
      bi = 0; bs = 0;
      for (int j = 0; j < NREF; j++) begin
        sc[j] = 0;
        for (int b = 0; b < NBLK; b++) begin
          int mac;
          mac = 0;
          for (int i = b * NACT; i < (b + 1) * NACT; i++) mac += (q[i] == refs[j][i]) ? 1 : -1;
          sc[j] += adc(mac, NACT, 1, 8);
        end
        if (j < nr && (j == 0 || sc[j] > bs)) begin bi = j; bs = sc[j]; end
      end
      if (nr > 6 && sc[2] == bs && bi == 2) n_tie++;
      if (nr < NREF) n_window++;
      @(negedge clk);
      start = 1; query = q; ref_count = 4'(nr);
      @(negedge clk);
      start = 0;
      query = ~q;    // the controller must have latched the query
      while (!done) @(negedge clk);
      checks++;
      if (int'(best_idx) != bi || int'(best_score) != bs) begin
        failures++;
        $display("FAIL t=%0d best %0d/%0d expected %0d/%0d", t, best_idx, best_score, bi, bs);
      end
      @(posedge clk);
      #1;
      checks++;
      if (t_done - t_start != NBLK + 4) begin
        failures++;
        $display("FAIL latency %0d expected %0d", t_done - t_start, NBLK + 4);
      end
    end
    checks++;
    if (n_tie == 0 || n_window == 0) begin failures++; $display("FAIL tie/window not exercised"); end
    $display("ties=%0d windows=%0d", n_tie, n_window);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
