// llrf_pkg: constants shared by the LLRF (low-level RF) blocks.
//
// All phase accumulators in this design are 30 bits wide (a full turn is
// 2^30), the phase detector works on 20-bit I/Q and produces a 22-bit phase in
// which +-pi is +-2^21, and the system clock is the 50 MHz machine reference.
// The default increments below are f/50 MHz * 2^30, rounded. The CORDIC
// arctangent table is atan(2^-i)/pi * 2^31, i.e. pi maps to 2^31; each CORDIC
// shifts it down to its own angle width.
package llrf_pkg;

  localparam int PHASE_W = 30;   // phase accumulator width
  localparam int ADC_W   = 14;   // ADC sample width
  localparam int DAC_W   = 14;   // DAC word width
  localparam int IQ_W    = 20;   // rectangular input width of the phase detector CORDIC
  localparam int PH_W    = 22;   // phase detector output width (+-pi)

  // Harmonic numbers of the three loop accumulators: h=1 (89.8 kHz revolution),
  // h=28 (2.5 MHz) and h=588 (52.8 MHz) = 28 * 21.
  localparam int H28 = 28;
  localparam int H21 = 21;

  // Nominal h=1 increment for 52.8 MHz / 588 = 89.796 kHz at 50 MHz.
  localparam logic [PHASE_W-1:0] NOM_INC_H1 = 30'd1928353;
  // Delivery Ring NCO increments: 2.36 MHz, 4.41 MHz and 294 kHz.
  localparam logic [PHASE_W-1:0] INC_DR_2M36 = 30'd50680614;
  localparam logic [PHASE_W-1:0] INC_DR_4M41 = 30'd94704029;
  localparam logic [PHASE_W-1:0] INC_DR_294K = 30'd6313602;
  // Per-bunch Delivery Ring phase advance: 337.9 deg = 397.7 ns at 2.36 MHz.
  localparam logic [PHASE_W-1:0] DR_ADV_337_9 = 30'd1007826006;

  // Inverse CORDIC gain prod(1/sqrt(1+2^-2i)) = 0.60725 in Q16.
  localparam int unsigned CORDIC_KINV_Q16 = 39797;

  // atan(2^-i) scaled so that pi = 2^31.
  localparam int CORDIC_TAB_N = 24;
  typedef logic [31:0] atan_tab_t [CORDIC_TAB_N];
  localparam atan_tab_t ATAN_TAB = '{
    32'd536870912, 32'd316933406, 32'd167458907, 32'd85004756,
    32'd42667331,  32'd21354465,  32'd10679838,  32'd5340245,
    32'd2670163,   32'd1335087,   32'd667544,    32'd333772,
    32'd166886,    32'd83443,     32'd41722,     32'd20861,
    32'd10430,     32'd5215,      32'd2608,      32'd1304,
    32'd652,       32'd326,       32'd163,       32'd81
  };

  // Arctangent of stage i expressed with 'w' bits for a half turn (pi = 2^(w-1)).
  function automatic logic [31:0] atan_w(input int i, input int w);
    logic [32:0] t;
    if (i >= CORDIC_TAB_N) return 32'd0;
    t = {1'b0, ATAN_TAB[i]} + (33'd1 << (31 - w));
    return 32'(t >> (32 - w));
  endfunction

endpackage
