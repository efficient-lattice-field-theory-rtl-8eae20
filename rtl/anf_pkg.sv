// anf_pkg: types and helper functions shared by the hybrid analog-digital
// normalizing-flow solver.
//
// Number format. Every activation, LoRA weight, normalization parameter and
// field value is a signed 16-bit fixed-point number with 8 fraction bits
// (Q8.8). The format is this design's choice; the only widths the source
// system fixes are those of its converters (16-bit DAC, 14-bit ADC).
//
// Crossbar weights are conductances. A cell holds an integer conductance code
// in microsiemens (7 bits, 0..127 uS); the signed weight of a cell is its
// conductance minus the conductance of the reference cell in the same row,
// divided by 2^WFRAC. With the reference column at 50 uS and the 20..80 uS
// programming window of the array this gives weights in [-1.875, +1.875].
//
// A layer of the mixer network is described by one layer_desc_t word: where
// its input and output vectors live in the feature buffer (base + strides,
// which also express the transposes between token and channel mixing), which
// block of crossbar rows/columns holds its weights, and which digital
// operations (time embedding, batch normalization, LoRA, ReLU, residual) it
// uses. The descriptor format is this design's own.
package anf_pkg;

  localparam int DW       = 16;  // data width, Q8.8
  localparam int FRAC     = 8;   // fraction bits of data_t
  localparam int ADC_BITS = 14;  // ADS8324-class converter resolution
  localparam int DAC_BITS = 16;  // DAC80508-class converter resolution
  localparam int GW       = 7;   // conductance code width (uS)
  localparam int WFRAC    = 4;   // weight = (G - Gref) / 2^WFRAC
  localparam int ADC_DROP = 2;   // LSBs of the Q8.8 column result below the ADC LSB
  localparam int ABW      = 8;   // feature-buffer address width
  localparam int XW       = 5;   // crossbar row/column index width (32x32)
  localparam int VLEN_MAX = 32;  // longest vector a layer can read or write

  typedef logic signed [DW-1:0]       data_t;
  typedef logic signed [ADC_BITS-1:0] adc_t;
  typedef logic        [GW-1:0]       gcode_t;
  typedef logic        [ABW-1:0]      baddr_t;

  // One layer of the network as executed by layer_engine.
  typedef struct packed {
    baddr_t     src_base;     // first input element in the feature buffer
    baddr_t     src_vstride;  // address step between input vectors
    baddr_t     src_estride;  // address step between elements of one input vector
    baddr_t     dst_base;
    baddr_t     dst_vstride;
    baddr_t     dst_estride;
    logic [5:0] n_vec;        // vectors processed with the same weights
    logic [5:0] in_len;       // input length  = crossbar rows used (1..32)
    logic [5:0] out_len;      // output length = crossbar columns used (1..31)
    logic [XW-1:0] row_base;  // first crossbar row of this layer's weights
    logic [XW-1:0] col_base;  // first crossbar column of this layer's weights
    logic       relu_analog;  // ReLU in the TIA (before the LoRA sum)
    logic       relu_digital; // ReLU after the LoRA sum
    logic       residual;     // add the old destination value (skip connection)
    logic       lora_en;      // add the LoRA branch B(Ax)
    logic       bn_en;        // batch-normalize the input
    logic       temb_en;      // add the time embedding to the input
    logic       chan_is_vec;  // channel index = vector index (else element index)
    logic [9:0] lora_base;    // first LoRA weight of this layer
    logic [5:0] bn_base;      // first normalization entry of this layer
  } layer_desc_t;

  // Saturate a wide signed value to data_t.
  function automatic data_t sat16(input logic signed [39:0] v);
    if (v > 40'sd32767)       return 16'sh7fff;
    else if (v < -40'sd32768) return 16'sh8000;
    else                      return data_t'(v);
  endfunction

  // Checkerboard coupling mask (M^t of the flow): 1 marks a frozen site.
  function automatic logic mask_bit(input int unsigned t, input int unsigned i,
                                    input int unsigned j);
    logic todd;
    todd = logic'(t % 2);
    return (((i + j) % 2) == 0) ? todd : ~todd;
  endfunction

  // Address offset of lattice site (i, j) when the L x L lattice is stored
  // patch by patch (P x P patches, row-major inside a patch and between patches).
  function automatic int unsigned patch_addr(input int unsigned i, input int unsigned j,
                                             input int unsigned l, input int unsigned p);
    int unsigned patch, pix;
    patch = (i / p) * (l / p) + (j / p);
    pix   = (i % p) * p + (j % p);
    return patch * p * p + pix;
  endfunction

endpackage
