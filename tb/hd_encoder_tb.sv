// hd_encoder_tb: runs the encoding controller with a real enc_xbar at a reduced
// size (32 bins, D = 1024, Q = 8, CHUNK = 64, 8 active rows, at most 20 peaks)
// and compares every encoded hypervector with the reference model of
// oms_model_pkg: for each chunk and each batch of up to 8 peaks,
// mac = sum ID*LV, acc += adc(mac)*N, bit = (acc >= 0). Spectra of 0 to 25
// peaks cover single and multiple batches and the overflow rule (peaks past
// 20 dropped, overflow set). Also checks that encoding takes
// hv_valid to rise NCHUNK*ceil(P/8) + 2 clock edges after the edge that
// accepts the last peak, and
// stalls the peak stream at random.
module hd_encoder_tb;
  import oms_model_pkg::*;
  localparam int NBINS = 32, D = 1024, Q = 8, CHUNK = 64, NACT = 8, MAXP = 20, AB = 8;
  localparam int NCHUNK = D / CHUNK;
  int checks = 0, failures = 0;
  int n_multi = 0, n_over = 0, n_stall = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // crossbar programming (testbench side)
  logic prog_en = 0;
  logic [4:0] prog_row = '0;
  logic [3:0] prog_grp = '0;
  logic [CHUNK-1:0][2:0] prog_level = '0;

  logic pk_valid = 0, pk_ready, pk_last = 0;
  logic [4:0] pk_bin = '0;
  logic [2:0] pk_level = '0;
  logic hv_valid, overflow, busy;
  logic [D-1:0] hv;
  logic x_rd_en;
  logic [NACT-1:0] x_wl_en, x_bl_pos;
  logic [NACT-1:0][4:0] x_wl_row;
  logic [3:0] x_grp;
  logic [CHUNK-1:0][AB-1:0] x_code;

  hd_encoder #(.NBINS(NBINS), .D(D), .Q(Q), .CHUNK(CHUNK), .NACT(NACT), .MAX_PEAKS(MAXP), .ADC_BITS(AB)) dut (
    .clk, .rst_n, .pk_valid, .pk_ready, .pk_bin, .pk_level, .pk_last, .hv_valid, .hv, .overflow, .busy,
    .x_rd_en, .x_wl_en, .x_wl_row, .x_bl_pos, .x_grp, .x_code);
  enc_xbar #(.LROWS(NBINS), .COLS(D), .WBITS(3), .NACT(NACT), .GROUP(CHUNK), .ADC_BITS(AB)) xbar (
    .clk, .prog_en, .prog_row, .prog_grp, .prog_level, .rd_en(x_rd_en), .wl_en(x_wl_en), .wl_row(x_wl_row),
    .bl_pos(x_bl_pos), .grp_sel(x_grp), .code(x_code));

  localparam int NSPEC = 14;
  int idl [NBINS][D];
  int t_last_q [$];
  int spec_np [NSPEC];
  int spec_b [NSPEC][32];
  int spec_l [NSPEC][32];
  int cyc = 0;
  logic hs = 0;
  int t_hv_q [$];
  // handshake and result events, sampled at the clock edge
  always @(posedge clk) begin
    cyc <= cyc + 1;
    hs <= pk_valid && pk_ready;
    if (pk_valid && pk_ready && pk_last) t_last_q.push_back(cyc);
    if (rst_n && hv_valid) t_hv_q.push_back(cyc);
  end

  function automatic logic [D-1:0] model(int np, int pb[], int pl[]);
    logic [D-1:0] h;
    int nk, nb;
    nk = (np > MAXP) ? MAXP : np;
    nb = (nk == 0) ? 1 : (nk + NACT - 1) / NACT;
    for (int d = 0; d < D; d++) begin
      int acc;
      acc = 0;
      for (int b = 0; b < nb; b++) begin
        int mac, n;
        mac = 0; n = 0;
        for (int i = b * NACT; i < (b + 1) * NACT && i < nk; i++) begin
          mac += (lv_bit(pl[i], d / CHUNK, D, Q, CHUNK, 1) ? 1 : -1) * id_weight(idl[pb[i]][d], 3);
          n++;
        end
        acc += adc(mac, n, 4, AB) * n;
      end
      h[d] = (acc >= 0);
    end
    return h;
  endfunction

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int r = 0; r < NBINS; r++)
      for (int g = 0; g < NCHUNK; g++) begin
        @(posedge clk);
        prog_en <= 1; prog_row <= 5'(r); prog_grp <= 4'(g);
        for (int c = 0; c < CHUNK; c++) begin
          int l;
          l = int'($urandom_range(7));
          idl[r][g*CHUNK+c] = l;
          prog_level[c] <= 3'(l);
        end
      end
    @(posedge clk) prog_en <= 0;

    fork
      // driver: spectra back to back; the first peak of the next spectrum is
      // offered while the previous one is still being encoded, so it stalls
      for (int t = 0; t < NSPEC; t++) begin
        int np;
        np = (t == 0) ? 1 : (t == 1) ? 8 : (t == 2) ? 9 : (t == 3) ? 25 : (t == 4) ? 20 : 1 + int'($urandom_range(23));
        spec_np[t] = np;
        for (int i = 0; i < np; i++) begin
          bit dup;
          do begin
            spec_b[t][i] = int'($urandom_range(NBINS - 1));
            dup = 0;
            for (int k = 0; k < i; k++) if (spec_b[t][k] == spec_b[t][i]) dup = 1;
          end while (dup);
          spec_l[t][i] = int'($urandom_range(Q - 1));
        end
        for (int i = 0; i < np; i++) begin
          @(negedge clk);
          while ($urandom_range(3) == 0) begin pk_valid = 0; @(negedge clk); end
          pk_valid = 1; pk_bin = 5'(spec_b[t][i]); pk_level = 3'(spec_l[t][i]); pk_last = (i == np - 1);
          @(negedge clk);
          while (!hs) begin n_stall++; @(negedge clk); end
          pk_valid = 0; pk_last = 0;
        end
      end
      // monitor: compare each result with the model
      for (int t = 0; t < NSPEC; t++) begin
        int np, nk, nb, tl, th;
        logic [D-1:0] got_hv;
        logic got_ov;
        int pb[], pl[];
        logic [D-1:0] e;
        @(negedge clk);
        while (!hv_valid) @(negedge clk);
        got_hv = hv;
        got_ov = overflow;
        np = spec_np[t];
        pb = new[np]; pl = new[np];
        for (int i = 0; i < np; i++) begin pb[i] = spec_b[t][i]; pl[i] = spec_l[t][i]; end
        @(posedge clk);
        #1;
        tl = t_last_q.pop_front();
        th = t_hv_q.pop_front();
        nk = (np > MAXP) ? MAXP : np;
        nb = (nk + NACT - 1) / NACT;
        if (nb > 1) n_multi++;
        if (np > MAXP) n_over++;
        e = model(np, pb, pl);
        checks++;
        if (got_hv !== e) begin
          failures++;
          $display("FAIL spectrum %0d (%0d peaks): %0d bits differ", t, np, $countones(got_hv ^ e));
        end
        checks++;
        if (got_ov != (np > MAXP)) begin failures++; $display("FAIL overflow flag spectrum %0d", t); end
        checks++;
        if (th - tl != NCHUNK * nb + 3) begin
          failures++;
          $display("FAIL latency %0d expected %0d", th - tl, NCHUNK * nb + 3);
        end
      end
    join
    checks++;
    if (n_multi == 0 || n_over == 0 || n_stall == 0) begin
      failures++;
      $display("FAIL mechanisms not exercised multi=%0d over=%0d stall=%0d", n_multi, n_over, n_stall);
    end
    $display("multi-batch=%0d overflow=%0d stall=%0d", n_multi, n_over, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
