// apfp_pkg -- constants and helper functions shared by the APFP arithmetic
// and GEMM modules.
//
// Number format (hardware-packed form of an MPFR number): one word of
// APFP_BITS bits holding, from the most significant end, a 1-bit sign, a
// 63-bit two's-complement exponent and an (APFP_BITS-64)-bit mantissa. The
// widths (1/63/n*512-64) follow the packed layout of the design; putting the
// sign in the top bit and the mantissa in the low bits is this design's own
// choice. As in MPFR the value is (-1)^sign * 0.mantissa * 2^exponent, with
// the mantissa's top bit set for every non-zero number. Zero is encoded by an
// all-zero mantissa (exponent ignored); this encoding is this design's own.
//
// The latency functions mirror the pipelines of pipelined_add,
// karatsuba_mult, apfp_mult and apfp_add so that parents can size their
// delay lines; they are constant functions, evaluated at elaboration.
package apfp_pkg;

  // Defaults of the main 512-bit configuration.
  localparam int unsigned APFP_BITS      = 512;  // whole packed number
  localparam int unsigned EXP_BITS       = 63;   // exponent width
  localparam int unsigned MULT_BASE_BITS = 72;   // Karatsuba bottom-out width
  localparam int unsigned ADD_BASE_BITS  = 128;  // bits added per pipeline stage
  localparam int unsigned TILE_SIZE_N    = 32;
  localparam int unsigned TILE_SIZE_M    = 32;
  localparam int unsigned COMPUTE_UNITS  = 8;
  localparam int unsigned NUM_DDR_BANKS  = 4;

  // Mantissa width of a packed number of the given total width.
  function automatic int unsigned mant_bits(input int unsigned bits);
    return bits - 1 - EXP_BITS;
  endfunction

  function automatic int unsigned ceil_div(input int unsigned a, input int unsigned b);
    return (a + b - 1) / b;
  endfunction

  // Cycles through pipelined_add of width w.
  function automatic int unsigned add_latency(input int unsigned w, input int unsigned base);
    return ceil_div(w, base);
  endfunction

  // Cycles through karatsuba_mult of width bits. Each recursion level costs
  // one cycle for the operand differences, two (w+2)-bit additions for the
  // middle term and one 2w-bit addition for the recombination; the bottom
  // (dsp_mult) costs one cycle.
  function automatic int unsigned karatsuba_latency(input int unsigned bits,
                                                    input int unsigned mult_base,
                                                    input int unsigned add_base);
    int unsigned lat;
    int unsigned w;
    lat = 0;
    w   = bits;
    while (w > mult_base) begin
      lat = lat + 1 + 2 * add_latency(w + 2, add_base) + add_latency(2 * w, add_base);
      w   = w / 2;
    end
    return lat + 1;
  endfunction

  // Cycles through apfp_mult: mantissa product plus one normalisation stage.
  function automatic int unsigned mult_latency(input int unsigned bits,
                                               input int unsigned mult_base,
                                               input int unsigned add_base);
    return karatsuba_latency(mant_bits(bits), mult_base, add_base) + 1;
  endfunction

  // Cycles through apfp_add: order, align, add (chunked), count, normalise.
  function automatic int unsigned fadd_latency(input int unsigned bits,
                                               input int unsigned add_base);
    return 4 + add_latency(mant_bits(bits) + 3, add_base);
  endfunction

  function automatic int unsigned mac_latency(input int unsigned bits,
                                              input int unsigned mult_base,
                                              input int unsigned add_base);
    return mult_latency(bits, mult_base, add_base) + fadd_latency(bits, add_base);
  endfunction

  // DDR bank of compute unit i: bank 1 (next to the host logic) first, then
  // 0, 2, 3, repeating round robin.
  function automatic int unsigned cu_ddr_bank(input int unsigned i);
    case (i % NUM_DDR_BANKS)
      0: return 1;
      1: return 0;
      2: return 2;
      default: return 3;
    endcase
  endfunction

endpackage
