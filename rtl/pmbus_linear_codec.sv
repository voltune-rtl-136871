// pmbus_linear_codec - PMBus fixed-point conversions used by the PowerManager.
//
// Voltages travel on PMBus in LINEAR16: an unsigned 16-bit mantissa whose
// exponent is fixed by the regulator's VOUT_MODE, volts = mantissa * 2^VOUT_EXP.
// Telemetry such as READ_IOUT uses LINEAR11: a 16-bit word holding a signed
// 5-bit exponent in [15:11] and a signed 11-bit mantissa in [10:0].
// The requester side of VolTune works in millivolts and milliamps, so this
// block provides three purely combinational paths:
//
//   enc_mv   -> enc_word  LINEAR16 encode, round to nearest, saturating
//   dec_word -> dec_mv    LINEAR16 decode, round to nearest
//   l11_word -> l11_milli LINEAR11 decode to thousandths (mA for currents),
//                         truncated toward minus infinity, saturated to 16 bits
//
// Using LINEAR16 for voltage and LINEAR11 for telemetry follows the paper; the
// millivolt units, the rounding and the VOUT_EXP default of -12 (the usual
// UCD9248 VOUT_MODE) are this design's choices. The divide by 1000 of the
// encoder is done as a multiply by a 2^-32-scaled reciprocal, which is exact
// for every 16-bit input because 4096*mV is never an odd multiple of 500.
//
// dec_mv[15] is always zero (0xFFFF decodes to 16 000 mV); the port keeps
// 16 bits to match the other millivolt fields.
module pmbus_linear_codec #(
  parameter int VOUT_EXP = -12           // LINEAR16 exponent, negative
) (
  input  logic        [15:0] enc_mv,
  output logic        [15:0] enc_word,
  input  logic        [15:0] dec_word,
  output logic        [15:0] dec_mv,
  input  logic        [15:0] l11_word,
  output logic signed [15:0] l11_milli
);

  localparam int          FRAC  = -VOUT_EXP;
  // round(2^(32+FRAC) / 1000)
  localparam logic [63:0] RECIP = ((64'd1 << (32 + FRAC)) + 64'd500) / 64'd1000;

  // ------------------------------------------------------------ LINEAR16 enc
  logic [63:0] enc_prod;
  logic [31:0] enc_mant;
  always_comb begin
    enc_prod = 64'(enc_mv) * RECIP + (64'd1 << 31);
    enc_mant = enc_prod[63:32];
    enc_word = (enc_mant > 32'h0000_FFFF) ? 16'hFFFF : enc_mant[15:0];
  end

  // ------------------------------------------------------------ LINEAR16 dec
  logic [31:0] dec_prod;
  always_comb begin
    dec_prod = 32'(dec_word) * 32'd1000 + (32'd1 << (FRAC - 1));
    dec_mv   = 16'(dec_prod >> FRAC);
  end

  // ------------------------------------------------------------ LINEAR11 dec
  logic signed [4:0]  l11_exp;
  logic signed [10:0] l11_mant;
  logic signed [47:0] l11_scaled;
  always_comb begin
    l11_exp    = l11_word[15:11];
    l11_mant   = l11_word[10:0];
    l11_scaled = 48'(l11_mant) * 48'sd1000;
    if (l11_exp >= 0) l11_scaled = l11_scaled <<< l11_exp;
    else              l11_scaled = l11_scaled >>> (-l11_exp);
    if (l11_scaled > 48'sd32767)       l11_milli = 16'sd32767;
    else if (l11_scaled < -48'sd32768) l11_milli = -16'sd32768;
    else                               l11_milli = l11_scaled[15:0];
  end

endmodule
