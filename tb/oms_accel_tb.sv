// oms_accel_tb: end-to-end test of the accelerator at a reduced size.
//
// It programs random 3-bit ID hypervectors for every m/z bin (once with an
// illegal zero element first, which must raise id_illegal), encodes NREF
// reference spectra into the search array, encodes query spectra (modified
// copies of references: some peaks moved to other bins, some intensities
// changed) into the MLC query store, and searches every stored query. Every
// encoded hypervector, overflow flag and search result is compared with the
// reference model of oms_model_pkg, computed here from the programmed IDs.
// Commands and peaks are offered before the design is ready so both streams
// stall. Mechanisms counted (each must occur): multi-batch encoding, peak
// overflow, encode to reference, encode to query, search, a tied search,
// a restricted ref_count window, an illegal ID write, peak and command stalls.
module oms_accel_tb;
  import oms_pkg::*;
  import oms_model_pkg::*;
  localparam int D = 1024, NBINS = 64, Q = 8, CHUNK = 64, NACT = 16, ID_BITS = 3, CELL_BITS = 3;
  localparam int NREF = 8, SLOTS = 4, MAX_PEAKS = 40, ADC_BITS = 8;
  localparam int NUSE = NREF;
  localparam int NQRY = 4, MINP = 10, MAXP_GEN = 45;
  localparam int WATCHDOG_CYCLES = 400000;
  localparam int BINW = $clog2(NBINS), LVW = $clog2(Q), NCHUNK = D / CHUNK, CKW = $clog2(NCHUNK);
  localparam int CW = $clog2(NREF), SWD = $clog2(SLOTS), AW = (SWD > CW) ? SWD : CW;
  localparam int NBLK = D / NACT, SCORE_W = ADC_BITS + $clog2(NBLK + 1) + 1;
  localparam int WMAX = 1 << (ID_BITS - 1);
  localparam int NSPEC = NUSE + NQRY;

  int checks = 0, failures = 0;
  int n_multi = 0, n_over = 0, n_encref = 0, n_encq = 0, n_search = 0, n_tie = 0, n_window = 0;
  int n_illegal = 0, n_pkstall = 0, n_cmdstall = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic id_wr_en = 0;
  logic [BINW-1:0] id_row = '0;
  logic [CKW-1:0] id_grp = '0;
  logic [CHUNK-1:0][ID_BITS:0] id_w = '0;
  logic id_illegal;
  logic cmd_valid = 0, cmd_ready;
  op_e cmd_op = OP_ENC_QUERY;
  logic [AW-1:0] cmd_arg = '0;
  logic [CW:0] ref_count = '0;
  logic pk_valid = 0, pk_ready, pk_last = 0;
  logic [BINW-1:0] pk_bin = '0;
  logic [LVW-1:0] pk_level = '0;
  logic res_valid, enc_overflow, busy;
  op_e res_op;
  logic [CW-1:0] res_best_idx;
  logic signed [SCORE_W-1:0] res_best_score;
  logic [D-1:0] enc_hv;

  oms_accel #(.D(D), .NBINS(NBINS), .Q(Q), .CHUNK(CHUNK), .NACT(NACT), .ID_BITS(ID_BITS),
              .CELL_BITS(CELL_BITS), .NREF(NREF), .SLOTS(SLOTS), .MAX_PEAKS(MAX_PEAKS),
              .ADC_BITS(ADC_BITS)) dut (.*);

  // ---------------- reference model ----------------
  int idw [NBINS][D];
  bit lvt [Q][NCHUNK];
  int spec_np [NSPEC];
  int spec_b [NSPEC][MAXP_GEN];
  int spec_l [NSPEC][MAXP_GEN];
  logic [D-1:0] spec_hv [NSPEC];

  function automatic logic [D-1:0] encode_model(int s);
    logic [D-1:0] h;
    int nk, nb;
    nk = (spec_np[s] > MAX_PEAKS) ? MAX_PEAKS : spec_np[s];
    nb = (nk == 0) ? 1 : (nk + NACT - 1) / NACT;
    for (int d = 0; d < D; d++) begin
      int acc;
      acc = 0;
      for (int b = 0; b < nb; b++) begin
        int mac, n;
        mac = 0; n = 0;
        for (int i = b * NACT; i < (b + 1) * NACT && i < nk; i++) begin
          mac += (lvt[spec_l[s][i]][d / CHUNK] ? 1 : -1) * idw[spec_b[s][i]][d];
          n++;
        end
        acc += adc(mac, n, WMAX, ADC_BITS) * n;
      end
      h[d] = (acc >= 0);
    end
    return h;
  endfunction

  function automatic int score_model(logic [D-1:0] q, logic [D-1:0] r);
    int sc;
    sc = 0;
    for (int b = 0; b < NBLK; b++) begin
      int mac;
      mac = 0;
      for (int i = b * NACT; i < (b + 1) * NACT; i++) mac += (q[i] == r[i]) ? 1 : -1;
      sc += adc(mac, NACT, 1, ADC_BITS);
    end
    return sc;
  endfunction

  // ---------------- operation list ----------------
  typedef struct { op_e op; int arg; int spec; int nref; } oper_t;
  oper_t ops [$];

  // handshake and result events sampled at the clock edge
  logic hs_cmd = 0, hs_pk = 0;
  typedef struct { op_e op; logic [D-1:0] hv; logic ovf; int idx; int score; } res_t;
  res_t resq [$];
  always @(posedge clk) begin
    hs_cmd <= cmd_valid && cmd_ready;
    hs_pk  <= pk_valid && pk_ready;
    if (cmd_valid && !cmd_ready && rst_n) n_cmdstall++;
    if (pk_valid && !pk_ready && rst_n) n_pkstall++;
    if (rst_n && res_valid) begin
      res_t r;
      r.op = res_op; r.hv = enc_hv; r.ovf = enc_overflow; r.idx = int'(res_best_idx); r.score = int'(res_best_score);
      resq.push_back(r);
    end
    if (rst_n && id_illegal) n_illegal++;
  end

  int cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (cyc == WATCHDOG_CYCLES) begin
      failures++;
      $display("watchdog expired");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic make_spectrum(int s, int np);
    spec_np[s] = np;
    for (int i = 0; i < np; i++) begin
      bit dup;
      do begin
        spec_b[s][i] = int'($urandom_range(NBINS - 1));
        dup = 0;
        for (int k = 0; k < i; k++) if (spec_b[s][k] == spec_b[s][i]) dup = 1;
      end while (dup);
      spec_l[s][i] = int'($urandom_range(Q - 1));
    end
  endtask

  // query = reference src with a few peaks moved to free bins and a few levels changed
  task automatic make_query(int s, int src);
    spec_np[s] = spec_np[src];
    for (int i = 0; i < spec_np[src]; i++) begin spec_b[s][i] = spec_b[src][i]; spec_l[s][i] = spec_l[src][i]; end
    for (int m = 0; m < 3; m++) begin
      int i;
      bit used;
      i = int'($urandom_range(spec_np[s] - 1));
      spec_l[s][i] = int'($urandom_range(Q - 1));
      i = int'($urandom_range(spec_np[s] - 1));
      do begin
        spec_b[s][i] = int'($urandom_range(NBINS - 1));
        used = 0;
        for (int k = 0; k < spec_np[s]; k++) if (k != i && spec_b[s][k] == spec_b[s][i]) used = 1;
      end while (used);
    end
  endtask

  task automatic send_cmd(op_e op, int arg, int nref);
    @(negedge clk);
    cmd_valid = 1; cmd_op = op; cmd_arg = AW'(arg); ref_count = (CW+1)'(nref);
    @(negedge clk);
    while (!hs_cmd) @(negedge clk);
    cmd_valid = 0;
  endtask

  task automatic send_peaks(int s);
    for (int i = 0; i < spec_np[s]; i++) begin
      pk_valid = 1; pk_bin = BINW'(spec_b[s][i]); pk_level = LVW'(spec_l[s][i]); pk_last = (i == spec_np[s] - 1);
      @(negedge clk);
      while (!hs_pk) @(negedge clk);
    end
    pk_valid = 0; pk_last = 0;
  endtask

  initial begin
    for (int j = 0; j < Q; j++)
      for (int c = 0; c < NCHUNK; c++) lvt[j][c] = lv_bit(j, c, D, Q, CHUNK, 1);

    // spectra: references (0..NUSE-1), the last reference duplicates
    // reference 1 to force a tie, then queries
    for (int r = 0; r < NUSE; r++) begin
      int np;
      np = MINP + int'($urandom_range(MAXP_GEN - MINP));
      if (r == 0) np = MAXP_GEN;          // more than MAX_PEAKS: overflow
      if (r == 2) np = NACT + 1;          // two batches
      make_spectrum(r, np);
    end
    spec_np[NUSE-1] = spec_np[1];
    for (int i = 0; i < spec_np[1]; i++) begin spec_b[NUSE-1][i] = spec_b[1][i]; spec_l[NUSE-1][i] = spec_l[1][i]; end
    for (int q = 0; q < NQRY; q++) make_query(NUSE + q, (q == 0) ? 1 : int'($urandom_range(NUSE - 2)));

    repeat (3) @(posedge clk);
    rst_n <= 1;

    // ID programming, first with one illegal element in bin 0, chunk 0
    for (int r = 0; r < NBINS; r++)
      for (int g = 0; g < NCHUNK; g++) begin
        @(negedge clk);
        id_wr_en = 1; id_row = BINW'(r); id_grp = CKW'(g);
        for (int c = 0; c < CHUNK; c++) begin
          int w;
          w = int'($urandom_range(2 * WMAX - 1));
          w = (w < WMAX) ? w - WMAX : w - WMAX + 1;
          idw[r][g*CHUNK+c] = w;
          id_w[c] = (ID_BITS+1)'(w);
        end
        if (r == 0 && g == 0) begin
          id_w[5] = '0;
          @(negedge clk);
          id_w[5] = (ID_BITS+1)'(idw[0][5]);   // rewrite it legally
        end
      end
    @(negedge clk) id_wr_en = 0;
    @(negedge clk);

    for (int s = 0; s < NSPEC; s++) spec_hv[s] = encode_model(s);

    for (int r = 0; r < NUSE; r++) ops.push_back('{OP_ENC_REF, r, r, 0});
    for (int q = 0; q < NQRY; q++) ops.push_back('{OP_ENC_QUERY, q % SLOTS, NUSE + q, 0});
    for (int q = 0; q < NQRY; q++) ops.push_back('{OP_SEARCH, q % SLOTS, NUSE + q, NUSE});
    ops.push_back('{OP_SEARCH, 0, NUSE, 3});

    fork
      // driver: the peaks of an encode are offered together with the command,
      // and the next command right after the last peak, so both stall
      foreach (ops[k]) begin
        if (ops[k].op == OP_SEARCH) begin
          send_cmd(ops[k].op, ops[k].arg, ops[k].nref);
        end else begin
          pk_valid = 1; pk_bin = BINW'(spec_b[ops[k].spec][0]); pk_level = LVW'(spec_l[ops[k].spec][0]);
          pk_last = (spec_np[ops[k].spec] == 1);
          send_cmd(ops[k].op, ops[k].arg, 0);
          send_peaks(ops[k].spec);
        end
      end
      // monitor
      foreach (ops[k]) begin
        res_t r;
        while (resq.size() == 0) @(negedge clk);
        r = resq.pop_front();
        check(r.op == ops[k].op, $sformatf("op %0d kind", k));
        if (ops[k].op != OP_SEARCH) begin
          int s, nk;
          s = ops[k].spec;
          nk = (spec_np[s] > MAX_PEAKS) ? MAX_PEAKS : spec_np[s];
          check(r.hv === spec_hv[s], $sformatf("op %0d hypervector of spectrum %0d (%0d bits differ)", k, s, $countones(r.hv ^ spec_hv[s])));
          check(r.ovf == (spec_np[s] > MAX_PEAKS), $sformatf("op %0d overflow flag", k));
          if (spec_np[s] > MAX_PEAKS) n_over++;
          if (nk > NACT) n_multi++;
          if (ops[k].op == OP_ENC_REF) n_encref++; else n_encq++;
        end else begin
          int bi, bs, nr;
          nr = ops[k].nref;
          bi = 0; bs = 0;
          for (int j = 0; j < nr; j++) begin
            int sc;
            sc = score_model(spec_hv[ops[k].spec], spec_hv[j]);
            if (j == 0 || sc > bs) begin bi = j; bs = sc; end
          end
          check(r.idx == bi && r.score == bs, $sformatf("op %0d search: got %0d/%0d expected %0d/%0d", k, r.idx, r.score, bi, bs));
          if (nr == NUSE && score_model(spec_hv[ops[k].spec], spec_hv[NUSE-1]) == bs && bi < NUSE - 1
              && spec_hv[bi] == spec_hv[NUSE-1]) n_tie++;
          if (nr < NUSE) n_window++;
          n_search++;
        end
      end
    join

    check(n_multi > 0, "multi-batch encoding happened");
    check(n_over > 0, "peak overflow happened");
    check(n_encref > 0 && n_encq > 0 && n_search > 0, "all three commands ran");
    check(n_tie > 0, "a tied search happened");
    check(n_window > 0, "a restricted ref_count search happened");
    check(n_illegal == 1, $sformatf("one illegal ID write flagged (%0d)", n_illegal));
    check(n_pkstall > 0 && n_cmdstall > 0, "peak and command streams stalled");
    $display("multi=%0d overflow=%0d enc_ref=%0d enc_query=%0d search=%0d tie=%0d window=%0d illegal=%0d pk_stall=%0d cmd_stall=%0d",
             n_multi, n_over, n_encref, n_encq, n_search, n_tie, n_window, n_illegal, n_pkstall, n_cmdstall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
