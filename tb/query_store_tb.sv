// query_store_tb: writes random hypervectors into the MLC query store and reads
// them back. Checks the restored bits and the stored per-cell integers h'
// (computed here: first element of a group is the MSB, -1 -> 0, +1 -> 1,
// short last group padded with -1) for 3-bit cells with D not a multiple of 3,
// and the 2-bit example mapping (-1,-1)->0, (-1,+1)->1, (+1,-1)->2, (+1,+1)->3.
// Also checks the one-cycle read latency.
module query_store_tb;
  localparam int D = 100, NC3 = 34, SLOTS = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_en = 0, rd_en = 0;
  logic [2:0] wr_slot = '0, rd_slot = '0;
  logic [D-1:0] wr_hv = '0, rd_hv;
  logic rd_valid;
  logic [NC3*3-1:0] rd_cells;
  query_store #(.D(D), .CELL_BITS(3), .SLOTS(SLOTS)) dut (.clk, .rst_n, .wr_en, .wr_slot, .wr_hv,
    .rd_en, .rd_slot, .rd_valid, .rd_hv, .rd_cells);

  logic wr2 = 0, rd2 = 0;
  logic [0:0] s2 = '0;
  logic [3:0] hv2 = '0, rhv2;
  logic rv2;
  logic [3:0] cells2;
  query_store #(.D(4), .CELL_BITS(2), .SLOTS(2)) dut2 (.clk, .rst_n, .wr_en(wr2), .wr_slot(s2), .wr_hv(hv2),
    .rd_en(rd2), .rd_slot(s2), .rd_valid(rv2), .rd_hv(rhv2), .rd_cells(cells2));

  logic [D-1:0] model [SLOTS];

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
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int s = 0; s < SLOTS; s++) begin
      logic [D-1:0] h;
      for (int i = 0; i < D; i++) h[i] = 1'($urandom);
      model[s] = h;
      @(posedge clk);
      wr_en <= 1; wr_slot <= 3'(s); wr_hv <= h;
    end
    @(posedge clk) wr_en <= 0;
    for (int r = 0; r < 3 * SLOTS; r++) begin
      int s;
      s = int'($urandom_range(SLOTS - 1));
      @(posedge clk);
      rd_en <= 1; rd_slot <= 3'(s);
      @(posedge clk);
      rd_en <= 0;
      #1;
      check(rd_valid, "rd_valid one cycle after rd_en");
      check(rd_hv == model[s], $sformatf("read back slot %0d", s));
      for (int k = 0; k < NC3; k++) begin
        int e;
        e = 0;
        for (int b = 0; b < 3; b++) e = e * 2 + ((k * 3 + b < D) ? int'(model[s][k*3+b]) : 0);
        check(int'(rd_cells[k*3 +: 3]) == e, $sformatf("slot %0d cell %0d h'=%0d expected %0d", s, k, rd_cells[k*3 +: 3], e));
      end
      @(posedge clk);
      #1;
      check(!rd_valid, "rd_valid drops");
    end
    // 2-bit cells: elements (e0,e1),(e2,e3); bit 1 = +1
    @(posedge clk);
    wr2 <= 1; hv2 <= 4'b1001;  // e0=+1,e1=-1 -> 2 ; e2=-1,e3=+1 -> 1
    @(posedge clk);
    wr2 <= 0; rd2 <= 1;
    @(posedge clk);
    rd2 <= 0;
    #1;
    check(cells2[1:0] == 2'd2 && cells2[3:2] == 2'd1 && rhv2 == 4'b1001, "2-bit example A");
    @(posedge clk);
    wr2 <= 1; hv2 <= 4'b1100;  // (-1,-1) -> 0 ; (+1,+1) -> 3
    @(posedge clk);
    wr2 <= 0; rd2 <= 1;
    @(posedge clk);
    rd2 <= 0;
    #1;
    check(cells2[1:0] == 2'd0 && cells2[3:2] == 2'd3 && rhv2 == 4'b1100, "2-bit example B");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
