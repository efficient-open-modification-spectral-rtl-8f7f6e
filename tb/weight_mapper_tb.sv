// weight_mapper_tb: exhaustive check of the element-to-cell mapping for
// 3-bit (8-level) and 1-bit cells. Expected values come from the differential
// mapping g+ = (1+W/Wmax) gmax/2, g- = (1-W/Wmax) gmax/2 written out as a
// table in units of gmax/(2 Wmax), and from the level ordering
// {-4,-3,-2,-1,1,2,3,4} -> 0..7 ({-1,+1} -> 0,1 for binary cells).
module weight_mapper_tb;
  int checks = 0, failures = 0;

  logic signed [3:0] w3;
  logic [2:0] lvl3;
  logic [3:0] gp3, gn3;
  logic legal3;
  weight_mapper #(.WBITS(3)) dut3 (.w(w3), .level(lvl3), .g_pos(gp3), .g_neg(gn3), .legal(legal3));

  logic signed [1:0] w1;
  logic [0:0] lvl1;
  logic [1:0] gp1, gn1;
  logic legal1;
  weight_mapper #(.WBITS(1)) dut1 (.w(w1), .level(lvl1), .g_pos(gp1), .g_neg(gn1), .legal(legal1));

  // expected level of W = -4..4 (index W+4); -1 marks the illegal zero
  int exp_lvl3 [9] = '{0, 1, 2, 3, -1, 4, 5, 6, 7};

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int w = -8; w <= 7; w++) begin
      w3 = 4'(w);
      #1;
      if (w >= -4 && w <= 4 && w != 0) begin
        check(legal3 == 1'b1, $sformatf("legal w=%0d", w));
        check(int'(lvl3) == exp_lvl3[w+4], $sformatf("level w=%0d got %0d", w, lvl3));
        check(int'(gp3) == 4 + w && int'(gn3) == 4 - w, $sformatf("g w=%0d got %0d/%0d", w, gp3, gn3));
        check(int'(gp3) + int'(gn3) == 8, "g+ + g- = gmax");
      end else begin
        check(legal3 == 1'b0, $sformatf("illegal w=%0d", w));
      end
    end
    for (int w = -2; w <= 1; w++) begin
      w1 = 2'(w);
      #1;
      if (w == -1) check(legal1 && lvl1 == 1'b0 && gp1 == 2'd0 && gn1 == 2'd2, "binary -1");
      else if (w == 1) check(legal1 && lvl1 == 1'b1 && gp1 == 2'd2 && gn1 == 2'd0, "binary +1");
      else check(!legal1, $sformatf("binary illegal %0d", w));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
