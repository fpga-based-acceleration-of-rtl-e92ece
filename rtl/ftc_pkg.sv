// ftc_pkg: constants and helpers shared by the FT-convolution blocks.
//
// The defaults describe the main configuration: an overlap-save
// frequency-domain FIR filter (AOLS) with a 2,048-point FFT that handles
// 4 points per clock, 421-tap filters, and three filter pipelines sharing
// one input stream (3xAOLS-2048-P).
// These numbers are the original design's; AW (32-bit float addresses) is
// this design's choice.
package ftc_pkg;

  localparam int NFT_DEF  = 2048;  // FFT length N_FT (chunk length)
  localparam int NPC_DEF  = 4;     // points per clock N_FT-PC
  localparam int K_DEF    = 421;   // FIR filter length (taps)
  localparam int NREP_DEF = 3;     // replicated AOLS-P pipelines
  localparam int AW       = 32;    // global-memory address width, in 32-bit floats

  // Launch (kernel pass) of the AOLS structure.
  typedef enum logic {
    MODE_FFT  = 1'b0,  // 1st launch: forward FFT of the input chunks
    MODE_IFFT = 1'b1   // 2nd launch: multiply by filter, IFFT, power
  } mode_e;

  // Reverse the lowest `bits` bits of v.
  function automatic int unsigned bitrev(input int unsigned v, input int bits);
    int unsigned r;
    r = 0;
    for (int i = 0; i < bits; i++) if (v[i]) r = r | (32'd1 << (bits - 1 - i));
    return r;
  endfunction

endpackage
