// loren_pkg: constants and types shared by the LOREN neural receiver RTL.
//
// All activations, weights, layer-norm parameters and adapter entries are
// 16-bit two's-complement fixed-point numbers with FRAC fraction bits; the
// 16-bit width follows the uniform 16-bit quantisation of the hardware, the
// fraction position (Q7.8) is this design's choice. A 3x3 kernel for one
// (input channel, output channel) pair is packed into one 144-bit SRAM word,
// tap k = 3*ky + kx (ky = row offset +1 along OFDM symbols, kx = column
// offset +1 along subcarriers) in bits [16k +: 16]. A layer-norm SRAM word
// is 224 bits: the 14 values of one (subcarrier, channel) pair, OFDM symbol
// t in bits [16t +: 16].
package loren_pkg;

  localparam int unsigned DW      = 16;   // data word width
  localparam int unsigned FRAC    = 8;    // fraction bits of a data word
  localparam int unsigned KTAPS   = 9;    // 3x3 kernel
  localparam int unsigned KW      = KTAPS * DW;  // 144-bit kernel word
  localparam int unsigned ACCW    = 48;   // accumulator width

  typedef logic signed [DW-1:0]   data_t;
  typedef logic signed [ACCW-1:0] acc_t;

  // Targets of the weight-load bus inside one residual block.
  typedef enum logic [2:0] {
    WT_CONV1  = 3'd0,  // kernel SRAMs of the first conv, bank = SRAM index
    WT_CONV2  = 3'd1,  // kernel SRAMs of the second conv
    WT_LN1    = 3'd2,  // gamma (banks 0-3) / beta (banks 4-7) of the first LayerNorm
    WT_LN2    = 3'd3,  // same for the second LayerNorm
    WT_BIAS1  = 3'd4,  // bias of the first conv, addr = output channel
    WT_BIAS2  = 3'd5,  // bias of the second conv
    WT_ADAPT1 = 3'd6,  // LOREN adapter SRAM of the first conv
    WT_ADAPT2 = 3'd7   // LOREN adapter SRAM of the second conv
  } wtarget_e;

  // Targets of stage 0 (input / output convolution).
  localparam logic [2:0] WT_IO_KERNEL = 3'd0;  // shared convin+convout SRAM
  localparam logic [2:0] WT_IO_BIASIN = 3'd1;  // bias of the input conv
  localparam logic [2:0] WT_IO_BIASOUT= 3'd2;  // bias of the output conv

  // Saturate a wide signed value to one data word.
  function automatic data_t sat16(input acc_t v);
    if (v > acc_t'(32767))       return data_t'(16'sh7fff);
    else if (v < -acc_t'(32768)) return data_t'(16'sh8000);
    else                         return data_t'(v[DW-1:0]);
  endfunction

endpackage
