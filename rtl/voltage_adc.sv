// voltage_adc: behavioural model of the voltage-mode ADC on one source line.
// It is an analog block; this model has no timing of its own and gives the code
// the converter would produce for an ideal, settled source-line voltage.
//
// With open-circuit voltage sensing the SL settles at
//   V_SL = Vref + sum_i(X_i W_i) / (N Wmax) * Vpulse,
// where N is the number of activated rows (this relation is the paper's). The
// model takes the ideal MAC sum(X_i W_i) and N and returns the signed code
//   code = floor(mac * FS / (N * WMAX)),  FS = 2^(ADC_BITS-1) - 1,
// so full scale +-Vpulse maps to +-FS. The resolution and the floor rounding
// are this design's choices; floor keeps the sign of the MAC exact, which the
// encoder's Sign() step relies on. N = 0 gives code 0.
//
// Interface: combinational; the crossbar models register the codes.
module voltage_adc #(
  parameter int unsigned ADC_BITS = 8,
  parameter int unsigned WMAX     = 4,
  parameter int unsigned NACT     = 64,
  parameter int unsigned MAC_W    = $clog2(NACT * WMAX + 1) + 1,
  parameter int unsigned N_W      = $clog2(NACT + 1)
) (
  input  logic signed [MAC_W-1:0]    mac,
  input  logic        [N_W-1:0]      n_act,
  output logic signed [ADC_BITS-1:0] code
);
  localparam int signed FS = (1 <<< (ADC_BITS - 1)) - 1;

  int signed num, den, q;

  always_comb begin
    num = int'(mac) * FS;
    den = int'({1'b0, n_act}) * int'(WMAX);
    if (den == 0) begin
      q = 0;
    end else begin
      q = num / den;                              // truncates toward zero
      if ((num % den != 0) && (num < 0)) q = q - 1;  // make it floor
    end
    code = ADC_BITS'(q);
  end
endmodule
