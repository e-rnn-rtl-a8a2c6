// ernn_pkg: constants and types shared by the E-RNN accelerator.
//
// The accelerator evaluates recurrent layers whose weight matrices are
// block-circulant: every LB x LB block is a circulant matrix fixed by one
// vector of LB numbers, and block products are done in the frequency domain.
// The block size of 16 and the 12-bit fixed-point word are the configuration
// the E-RNN evaluation reports for its best design (GRU-1024, FFT16, 12 bit).
// Everything else here (fraction bits, internal widths, the host-write
// target encoding) is this implementation's own choice.
package ernn_pkg;

  // ---- configuration taken from the evaluated design -------------------
  localparam int unsigned LB    = 16;   // block size = FFT size
  localparam int unsigned DW    = 12;   // data / weight word (12-bit fixed point)
  localparam int unsigned HID   = 1024; // GRU-1024 hidden size
  localparam int unsigned DIN   = 160;  // 153 TIMIT features, padded to a multiple of LB

  // ---- fixed-point formats (own choice) --------------------------------
  localparam int unsigned FRAC  = 8;    // fraction bits of data, bias and activations
  localparam int unsigned WFRAC = 8;    // fraction bits of stored weight spectra
  localparam int unsigned SW    = 18;   // width of stored input spectra
  localparam int unsigned SFRAC = 12;   // their fraction bits
  localparam int unsigned ACCW  = 40;   // spectral accumulator width
  localparam int unsigned PW    = 16;   // pre-activation width (FRAC fraction bits)
  localparam int unsigned TWF   = 14;   // twiddle fraction bits

  // ---- host write targets on the data bus ------------------------------
  typedef enum logic [2:0] {
    TGT_W_XC   = 3'd0,  // BRAM 2: W_(rz)(xc) and W_~cx spectra
    TGT_W_CC   = 3'd1,  // BRAM 4: W_~cc spectra
    TGT_BIAS   = 3'd2,  // BRAM 3: b_r, b_z, b_~c
    TGT_INPUT  = 3'd3,  // input buffer: x_t blocks
    TGT_W_LSTM = 3'd4   // reserved
  } tgt_e;

  // fixed-point helpers
  function automatic logic signed [DW-1:0] sat_dw(input logic signed [63:0] v);
    if (v > 64'sd2047)       return 12'sd2047;
    else if (v < -64'sd2048) return -12'sd2048;
    else                     return v[DW-1:0];
  endfunction

endpackage
