// enc_xbar_tb: programs a small encoding crossbar (16 rows x 256 columns of
// 8-level cells, 8 active rows, 64-column chunks) with random levels, then
// senses random row sets, input signs and chunks. The expected code of each
// sensed column is worked out here from a copy of the programmed levels:
// W = level-4 for level < 4, level-3 otherwise; mac = sum of +-W over the
// active rows; code = floor(mac*127/(N*4)). Codes must appear one clock after
// rd_en and hold while rd_en is low.
module enc_xbar_tb;
  localparam int LROWS = 16, COLS = 256, NACT = 8, GROUP = 64, NGRP = COLS / GROUP;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic prog_en = 0;
  logic [3:0] prog_row = '0;
  logic [1:0] prog_grp = '0;
  logic [GROUP-1:0][2:0] prog_level = '0;
  logic rd_en = 0;
  logic [NACT-1:0] wl_en = '0, bl_pos = '0;
  logic [NACT-1:0][3:0] wl_row = '0;
  logic [1:0] grp_sel = '0;
  logic [GROUP-1:0][7:0] code;

  enc_xbar #(.LROWS(LROWS), .COLS(COLS), .WBITS(3), .NACT(NACT), .GROUP(GROUP), .ADC_BITS(8)) dut (
    .clk, .prog_en, .prog_row, .prog_grp, .prog_level, .rd_en, .wl_en, .wl_row, .bl_pos, .grp_sel, .code);

  int lv [LROWS][COLS];

  function automatic int wt(int l);
    return (l < 4) ? l - 4 : l - 3;
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < LROWS; r++)
      for (int g = 0; g < NGRP; g++) begin
        @(posedge clk);
        prog_en <= 1; prog_row <= 4'(r); prog_grp <= 2'(g);
        for (int c = 0; c < GROUP; c++) begin
          int l;
          l = int'($urandom_range(7));
          lv[r][g*GROUP+c] = l;
          prog_level[c] <= 3'(l);
        end
      end
    @(posedge clk) prog_en <= 0;
    for (int t = 0; t < 300; t++) begin
      logic [NACT-1:0] en, pos;
      logic [NACT-1:0][3:0] rows;
      int g, n;
      logic [GROUP-1:0][7:0] prev_code;
      en = NACT'($urandom);
      if (t == 0) en = '1;
      if (t == 1) en = '0;
      pos = NACT'($urandom);
      if (t == 2) begin en = '1; pos = '1; end
      for (int i = 0; i < NACT; i++) rows[i] = 4'($urandom_range(LROWS - 1));
      g = int'($urandom_range(NGRP - 1));
      @(posedge clk);
      rd_en <= 1; wl_en <= en; bl_pos <= pos; wl_row <= rows; grp_sel <= 2'(g);
      @(posedge clk);
      rd_en <= 0; wl_en <= ~en; bl_pos <= ~pos;
      #1;
      n = $countones(en);
      for (int c = 0; c < GROUP; c++) begin
        int mac, e;
        mac = 0;
        for (int i = 0; i < NACT; i++)
          if (en[i]) mac += (pos[i] ? 1 : -1) * wt(lv[rows[i]][g*GROUP+c]);
        e = (n == 0) ? 0 : int'($floor(real'(mac) * 127.0 / (real'(n) * 4.0)));
        checks++;
        if ($signed(code[c]) != 8'(e)) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d col %0d code %0d expected %0d", t, c, $signed(code[c]), e);
        end
      end
      prev_code = code;
      @(posedge clk);
      #1;
      checks++;
      if (code != prev_code) begin failures++; $display("FAIL code changed without rd_en"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
