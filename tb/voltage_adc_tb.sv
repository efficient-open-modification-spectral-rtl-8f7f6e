// voltage_adc_tb: drives the ADC model with random MAC values and active-row
// counts and compares with the ideal transfer code = floor(mac*FS/(N*Wmax)),
// FS = 2^(ADC_BITS-1)-1, computed here in floating point. Also checks the end
// points of the range and that the sign of the code equals the sign of the MAC.
module voltage_adc_tb;
  localparam int ADC_BITS = 8;
  localparam int WMAX = 4;
  localparam int NACT = 64;
  localparam int MAC_W = $clog2(NACT * WMAX + 1) + 1;
  localparam int N_W = $clog2(NACT + 1);
  localparam int FS = 127;

  int checks = 0, failures = 0;
  logic signed [MAC_W-1:0] mac;
  logic [N_W-1:0] n;
  logic signed [ADC_BITS-1:0] code;

  voltage_adc #(.ADC_BITS(ADC_BITS), .WMAX(WMAX), .NACT(NACT)) dut (.mac(mac), .n_act(n), .code(code));

  task automatic try(int m, int nn);
    int e;
    mac = MAC_W'(m);
    n = N_W'(nn);
    #1;
    e = (nn == 0) ? 0 : int'($floor(real'(m) * FS / (real'(nn) * WMAX)));
    checks++;
    if (int'(code) != e || ((m < 0) != (code < 0))) begin
      failures++;
      $display("FAIL mac=%0d n=%0d code=%0d expected %0d", m, nn, code, e);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    try(NACT * WMAX, NACT);
    try(-NACT * WMAX, NACT);
    try(0, NACT);
    try(-1, NACT);
    try(1, 1);
    try(-1, 1);
    for (int k = 0; k < 2000; k++) begin
      int nn, m;
      nn = 1 + int'($urandom_range(NACT - 1));
      m = int'($urandom_range(2 * nn * WMAX)) - nn * WMAX;
      try(m, nn);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
