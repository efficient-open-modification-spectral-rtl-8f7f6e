// search_xbar_tb: programs 8 reference columns of 256 dimensions with random
// bits and senses random 64-row blocks with random query bits. For every column
// the expected code is computed here: mac = sum over the block of +1 where
// query and reference bits agree and -1 where they differ, code =
// floor(mac*127/64). Codes must appear one clock after rd_en.
module search_xbar_tb;
  localparam int ROWS = 256, COLS = 8, NACT = 64, NBLK = ROWS / NACT;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic prog_en = 0;
  logic [2:0] prog_col = '0;
  logic [ROWS-1:0] prog_data = '0;
  logic rd_en = 0;
  logic [1:0] blk = '0;
  logic [NACT-1:0] bl_pos = '0;
  logic [COLS-1:0][7:0] code;

  search_xbar #(.ROWS(ROWS), .COLS(COLS), .NACT(NACT), .ADC_BITS(8)) dut (
    .clk, .prog_en, .prog_col, .prog_data, .rd_en, .blk, .bl_pos, .code);

  logic [ROWS-1:0] refs [COLS];

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int j = 0; j < COLS; j++) begin
      for (int r = 0; r < ROWS; r++) refs[j][r] = 1'($urandom);
      @(posedge clk);
      prog_en <= 1; prog_col <= 3'(j); prog_data <= refs[j];
    end
    @(posedge clk) prog_en <= 0;
    for (int t = 0; t < 200; t++) begin
      logic [NACT-1:0] qb;
      int b;
      b = int'($urandom_range(NBLK - 1));
      for (int i = 0; i < NACT; i++) qb[i] = 1'($urandom);
      if (t == 0) qb = refs[3][b*NACT +: NACT];     // exact match in column 3
      if (t == 1) qb = ~refs[5][b*NACT +: NACT];    // exact opposite in column 5
      @(posedge clk);
      rd_en <= 1; blk <= 2'(b); bl_pos <= qb;
      @(posedge clk);
      rd_en <= 0;
      #1;
      for (int j = 0; j < COLS; j++) begin
        int mac, e;
        mac = 0;
        for (int i = 0; i < NACT; i++) mac += (qb[i] == refs[j][b*NACT+i]) ? 1 : -1;
        e = int'($floor(real'(mac) * 127.0 / 64.0));
        checks++;
        if ($signed(code[j]) != 8'(e)) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d col %0d code %0d expected %0d", t, j, $signed(code[j]), e);
        end
      end
      if (t == 0) begin checks++; if ($signed(code[3]) != 8'sd127) failures++; end
      if (t == 1) begin checks++; if ($signed(code[5]) != -8'sd127) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
