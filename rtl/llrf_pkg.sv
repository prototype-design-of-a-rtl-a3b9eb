// llrf_pkg: types and constants shared by the S-band TDC LLRF firmware.
//
// The ADC samples a 27.08 MHz intermediate frequency (IF) at 117.36 MHz, so
// f_IF : f_CLK = 3 : 13 and one IF period advances by dphi = 6*pi/13 per
// sample. Thirteen consecutive samples therefore cover exactly three IF
// periods, which is what the 13-sample non-IQ demodulator relies on.
//
// Word widths are not stated for the firmware; the choices here are:
//   ADC_W = 16  sample width of the board's ADCs, two's complement
//   IQ_W  = 18  demodulated I/Q width (two bits of headroom above ADC_W)
//   COEF_W/COEF_FRAC: demodulation coefficients in signed Q1.17
// The channel count (8 AC + 2 DC inputs) and the 3:13 ratio follow the
// design description; the record length is a design choice (2048 samples
// = 17.4 us, covering a 10 us acquisition window with margin).
package llrf_pkg;

  localparam int ADC_W     = 16;
  localparam int IQ_W      = 18;
  localparam int N_AC      = 8;     // AC0..AC7 down-converted RF inputs
  localparam int N_DC      = 2;     // DC0 (modulator HV), DC1 (reflected power)
  localparam int REF_CH    = 6;     // AC6 carries the reference (REF)
  localparam int VM_CH     = 7;     // AC7 monitors the vector-modulator output
  localparam int DEMOD_N   = 13;    // samples per demodulation window
  localparam int DEMOD_M   = 3;     // IF periods per window
  localparam int COEF_W    = 18;
  localparam int COEF_FRAC = 17;
  localparam int REC_LEN   = 2048;  // samples per pulse record
  localparam int REC_AW    = $clog2(REC_LEN);
  localparam int N_LANES   = N_AC + 1;   // memory lanes: 8 IQ lanes + 1 DC lane
  localparam int LANE_W    = 2 * IQ_W;   // one lane word holds I and Q
  localparam int LANE_AW   = $clog2(N_LANES);
  localparam int RECIP_FRAC = 30;   // 1/A_ref is held as 2^RECIP_FRAC / A_ref
  localparam int RECIP_W    = RECIP_FRAC + 1;  // holds 2^RECIP_FRAC/1 and the amp = 0 value 2^(RECIP_FRAC+1)-1
  localparam int DAC_W      = 16;   // DAC word width (I and Q)

  typedef logic signed [ADC_W-1:0] adc_t;

  typedef struct packed {
    logic signed [IQ_W-1:0] i;
    logic signed [IQ_W-1:0] q;
  } iq_t;

  // Address of one lane word in the acquisition memory, as seen from PCIe.
  typedef struct packed {
    logic [REC_AW-1:0]  sample;
    logic [LANE_AW-1:0] lane;
  } acq_addr_t;

  // Demodulation ROM for N = 13, M = 3:
  //   sin_coef(l) = round(2/13 * sin(l*6*pi/13) * 2^17)
  //   cos_coef(l) = round(2/13 * cos(l*6*pi/13) * 2^17),  l = 0..12
  // The factor 2/n of the demodulation sum is folded into the ROM.
  function automatic logic signed [COEF_W-1:0] sin_coef(input int unsigned l);
    case (l)
      0:  return  18'sd0;
      1:  return  18'sd20018;
      2:  return  18'sd4826;
      3:  return -18'sd18855;
      4:  return -18'sd9371;
      5:  return  18'sd16595;
      6:  return  18'sd13372;
      7:  return -18'sd13372;
      8:  return -18'sd16595;
      9:  return  18'sd9371;
      10: return  18'sd18855;
      11: return -18'sd4826;
      12: return -18'sd20018;
      default: return 18'sd0;
    endcase
  endfunction

  function automatic logic signed [COEF_W-1:0] cos_coef(input int unsigned l);
    case (l)
      0:  return  18'sd20165;
      1:  return  18'sd2431;
      2:  return -18'sd19579;
      3:  return -18'sd7151;
      4:  return  18'sd17855;
      5:  return  18'sd11455;
      6:  return -18'sd15094;
      7:  return -18'sd15094;
      8:  return  18'sd11455;
      9:  return  18'sd17855;
      10: return -18'sd7151;
      11: return -18'sd19579;
      12: return  18'sd2431;
      default: return 18'sd0;
    endcase
  endfunction

  // Saturate a wide signed value to IQ_W bits.
  function automatic logic signed [IQ_W-1:0] sat_iq(input logic signed [63:0] v);
    localparam logic signed [63:0] MAXV = (64'sd1 <<< (IQ_W-1)) - 1;
    localparam logic signed [63:0] MINV = -(64'sd1 <<< (IQ_W-1));
    if (v > MAXV)      return MAXV[IQ_W-1:0];
    else if (v < MINV) return MINV[IQ_W-1:0];
    else               return v[IQ_W-1:0];
  endfunction

endpackage
