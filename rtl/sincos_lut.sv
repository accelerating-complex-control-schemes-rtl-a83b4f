// sincos_lut: combinational sine/cosine lookup for one NCO lane.
//
// The top LUT_AW bits of a phase word address a full-period table of
// 2**LUT_AW signed 16-bit entries, round(32767*sin(2*pi*k/2**LUT_AW)).
// Cosine uses the same table a quarter period ahead. The table is computed
// at elaboration time by a fixed-point Taylor series (odd terms to x^11 on
// the first quadrant, mirrored to the others), so no data file is needed;
// entries are within one LSB of the exact value. No clock: the caller
// registers the outputs. The table form and its size are this design's
// choices; the paper only states that pulse frequency and phase are set at
// run time and that the recording module down-converts digitally.
module sincos_lut
  import qc_pkg::*;
#(
  parameter int unsigned AW = LUT_AW
) (
  input  logic [AW-1:0] addr,
  output sample_t       sin_o,
  output sample_t       cos_o
);

  localparam int unsigned N = 1 << AW;
  typedef sample_t lut_t [N];

  // sin(2*pi*k/N) * 32767, first quadrant by Taylor series in Q30.
  function automatic sample_t quarter_sin(input longint unsigned k);
    longint signed x, x2, term, acc;
    // x = pi/2 * k/(N/4) in Q30; pi/2 in Q30 = 1686629713
    x    = longint'((64'd1686629713 * k) / 64'(N / 4));
    x2   = (x * x) >>> 30;
    term = x;
    acc  = x;
    for (int n = 1; n <= 5; n++) begin
      term = -((term * x2) >>> 30) / longint'((2 * n) * (2 * n + 1));
      acc  = acc + term;
    end
    // scale Q30 -> 32767 with rounding
    return sample_t'((acc * 32767 + (64'sd1 <<< 29)) >>> 30);
  endfunction

  function automatic lut_t make_lut();
    lut_t t;
    for (int k = 0; k < int'(N); k++) begin
      int q, r;
      q = k / int'(N / 4);
      r = k % int'(N / 4);
      case (q)
        0: t[k] = quarter_sin(longint'(r));
        1: t[k] = quarter_sin(64'(int'(N / 4) - r));
        2: t[k] = -quarter_sin(longint'(r));
        default: t[k] = -quarter_sin(64'(int'(N / 4) - r));
      endcase
    end
    return t;
  endfunction

  localparam lut_t LUT = make_lut();

  logic [AW-1:0] cos_addr;
  assign cos_addr = addr + AW'(N / 4);
  assign sin_o    = LUT[addr];
  assign cos_o    = LUT[cos_addr];

endmodule
