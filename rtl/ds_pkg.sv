// ds_pkg: shared sizes of the digit-slicing radix-2 butterfly.
//
// The data path works on 16-bit two's-complement fixed-point words (Q1.15,
// magnitude below one). Each word is cut into four 4-bit digits; the three
// low digits are unsigned, the top digit is two's complement. The twiddle
// factor W = Wr - jWi is a 16-bit Q1.15 constant. The word size, digit size
// and twiddle size are the source's numbers; the transform size (64) and the
// output format (Q3.15, 18 bits) are this design's own choices.
package ds_pkg;

  localparam int DATA_W  = 16;               // input word, Q1.15
  localparam int SLICE_W = 4;                // bits per digit (p)
  localparam int NSLICE  = DATA_W / SLICE_W; // digits per word (b)
  localparam int TW_W    = 16;               // twiddle component, Q1.15
  localparam int FFT_N   = 64;               // transform size served by the ROM
  localparam int OUT_W   = DATA_W + 2;       // butterfly output, Q3.15

  // Width of a per-slice butterfly result.
  function automatic int sbf_w(int slice_w, int tw_w);
    return tw_w + slice_w + 2;
  endfunction

endpackage
