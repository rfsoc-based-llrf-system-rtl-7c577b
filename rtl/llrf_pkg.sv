// llrf_pkg: widths, types and constants shared by the LLRF gateware.
//
// Sample widths follow the signal names of the reference loop simulation:
// ADC words are 16 bits, base-band IQ, amplitude and phase words are 18 bits,
// and the rx/tx phase offsets applied in the CORDICs are 19 bits.  Phase is a
// fraction of a full turn: 2^N counts equal 360 degrees for an N-bit phase.
// The register-level configuration of one loop (Kp, Ki, setpoints, enables,
// phase offsets) is collected in loop_cfg_t.  Gain widths are this design's
// choice.
package llrf_pkg;

  localparam int ADC_W  = 16;  // ADC sample word
  localparam int IQ_W   = 18;  // base-band I, Q, amplitude, phase
  localparam int PH_W   = 19;  // CORDIC phase and rx/tx phase offsets
  localparam int GAIN_W = 18;  // Kp, Ki

  typedef struct packed {
    logic signed [IQ_W-1:0] i;
    logic signed [IQ_W-1:0] q;
  } iq_t;

  typedef struct packed {
    logic                     amp_enable;
    logic                     amp_reset;
    logic                     phs_enable;
    logic                     phs_reset;
    logic signed [IQ_W-1:0]   amp_setpoint;
    logic signed [IQ_W-1:0]   phs_setpoint;
    logic signed [GAIN_W-1:0] kp_amp;
    logic signed [GAIN_W-1:0] ki_amp;
    logic signed [GAIN_W-1:0] kp_phs;
    logic signed [GAIN_W-1:0] ki_phs;
    logic [PH_W-1:0]          rx_phase_offset;
    logic [PH_W-1:0]          tx_phase_offset;
  } loop_cfg_t;

  // atan(2^-i) as a fraction of a full turn, scaled by 2^32:
  // round(atan(2^-i) / (2*pi) * 2^32).
  function automatic logic [31:0] cordic_atan(input int i);
    case (i)
      0:  return 32'd536870912;
      1:  return 32'd316933406;
      2:  return 32'd167458907;
      3:  return 32'd85004756;
      4:  return 32'd42667331;
      5:  return 32'd21354465;
      6:  return 32'd10679838;
      7:  return 32'd5340245;
      8:  return 32'd2670163;
      9:  return 32'd1335087;
      10: return 32'd667544;
      11: return 32'd333772;
      12: return 32'd166886;
      13: return 32'd83443;
      14: return 32'd41722;
      15: return 32'd20861;
      16: return 32'd10430;
      17: return 32'd5215;
      18: return 32'd2608;
      19: return 32'd1304;
      20: return 32'd652;
      21: return 32'd326;
      22: return 32'd163;
      23: return 32'd81;
      default: return 32'd0;
    endcase
  endfunction

  // Reciprocal of the CORDIC gain prod(sqrt(1+2^-2i)) = 1.64676, scaled by 2^17.
  localparam int CORDIC_INV_GAIN = 79594;

endpackage
