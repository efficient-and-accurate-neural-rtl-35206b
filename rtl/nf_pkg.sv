// nf_pkg: widths, number formats, configuration records and small helper
// functions shared by the neural-field accelerator.
//
// Number formats used throughout the design:
//   activation / coordinate  : signed 16 bit, 12 fractional bits (Q3.12)
//   normalised conductance   : unsigned 10 bit, 8 fractional bits (1.0 = 256
//                              = mean low-resistance-state conductance)
//   SL current               : signed 48 bit, 20 fractional bits (Q3.12 input
//                              times Q2.8 conductance, summed over rows)
//   HAQ weight               : signed, 14 fractional bits (Q1.14 target)
//   phase                    : unsigned 16 bit, one full turn = 2^16
// The 512 x 512 array size, the 14-bit ADC resolution and the VCMAC mirror
// ratios (1, 0.8, 0.4, 0.2, 0.1) follow the paper; every other width here is
// a choice of this design.
package nf_pkg;

  localparam int unsigned ROWS      = 512;  // crossbar word/bit lines
  localparam int unsigned COLS      = 512;  // crossbar source lines
  localparam int unsigned ROW_W     = 9;
  localparam int unsigned COL_W     = 9;

  localparam int unsigned ACT_W     = 16;
  localparam int unsigned ACT_FRAC  = 12;
  localparam int unsigned G_W       = 10;
  localparam int unsigned G_ONE     = 256;
  localparam int unsigned CUR_W     = 48;
  localparam int unsigned ADC_W     = 14;
  localparam int unsigned NB_MAX    = 16;   // longest HAQ bit width (paper explores 4..16)
  localparam int unsigned NB_W      = 5;

  localparam int unsigned SP_DEPTH  = 1024; // activation scratchpad entries
  localparam int unsigned SP_AW     = 10;
  localparam int unsigned DIM_W     = 10;   // vector length field

  localparam int unsigned N_LAYER   = 32;   // layer descriptor table entries (NeRF needs 19)
  localparam int unsigned N_GE      = 4;    // encoder configuration entries
  localparam int unsigned N_OP      = 64;   // sequencer program entries (dynamic NeRF needs about 34)

  typedef logic signed [ACT_W-1:0] act_t;
  typedef logic        [G_W-1:0]   cond_t;
  typedef logic signed [CUR_W-1:0] cur_t;
  typedef logic signed [ADC_W-1:0] adc_code_t;

  // VCMAC switch code {C4, C3, C2, C1}: mirrors 0.8, 0.4, 0.2, 0.1 on top of
  // the always-on unity mirror.
  typedef logic [3:0] scode_t;

  typedef enum logic [1:0] {
    CMD_FORM  = 2'd0,  // random forming (Gaussian encoder matrix)
    CMD_SET   = 2'd1,  // program to LRS (+1)
    CMD_RESET = 2'd2,  // program to HRS (-1)
    CMD_READ  = 2'd3   // read conductance
  } cell_cmd_e;

  typedef enum logic [1:0] {
    ACT_NONE    = 2'd0,
    ACT_RELU    = 2'd1,
    ACT_SIGMOID = 2'd2,
    ACT_SINE    = 2'd3
  } act_fn_e;

  // One fully connected layer mapped onto the PE crossbar. Output neuron j
  // sits in band b = j / outs_per_band, columns col_base + (j % outs_per_band)
  // * nbits .. + nbits-1, rows row_base + b*in_dim .. + in_dim-1.
  typedef struct packed {
    logic [SP_AW-1:0]  src_addr;
    logic [DIM_W-1:0]  in_dim;
    logic [SP_AW-1:0]  dst_addr;
    logic [DIM_W-1:0]  out_dim;
    logic [ROW_W-1:0]  row_base;
    logic [COL_W-1:0]  col_base;
    logic [DIM_W-1:0]  outs_per_band;
    logic [NB_W-1:0]   nbits;
    scode_t            s_code;
    logic [5:0]        adc_shift;  // ADC LSB = 2^(adc_shift-20)
    act_t              scale;      // weight scale back to real units, Q3.12
    act_fn_e           act;
  } layer_desc_t;

  // One Gaussian-encoding pass: enc_dim random projections of in_dim inputs.
  typedef struct packed {
    logic [SP_AW-1:0]  src_addr;
    logic [DIM_W-1:0]  in_dim;
    logic [DIM_W-1:0]  enc_dim;
    logic [ROW_W-1:0]  row_base;
    logic [COL_W-1:0]  col_base;
    logic [SP_AW-1:0]  dst_addr;
    logic [5:0]        adc_shift;  // at most 16
    act_t              scale;      // sigma / conductance spread, Q3.12
    logic              append_raw; // append the unencoded inputs
  } ge_cfg_t;

  typedef enum logic [2:0] {
    OP_END    = 3'd0,
    OP_ENCODE = 3'd1,  // idx = encoder configuration
    OP_LAYER  = 3'd2,  // idx = layer descriptor
    OP_ADD    = 3'd3,  // sp[a+k] += sp[b+k], k < len (deformation x + dx)
    OP_RENDER = 3'd4   // sigma at a, rgb at b..b+2, step delta
  } op_code_e;

  typedef struct packed {
    op_code_e          opcode;
    logic [4:0]        idx;
    logic [SP_AW-1:0]  a;
    logic [SP_AW-1:0]  b;
    logic [7:0]        len;
    act_t              delta;
  } op_t;

  // Significance ratio in tenths: s = 1 + 0.8 C4 + 0.4 C3 + 0.2 C2 + 0.1 C1.
  function automatic int unsigned s_tenths(scode_t c);
    return 10 + 8 * int'(c[3]) + 4 * int'(c[2]) + 2 * int'(c[1]) + int'(c[0]);
  endfunction

  // 1/s in Q2.14, rounded.
  function automatic logic [15:0] inv_s_q14(scode_t c);
    int unsigned s10;
    s10 = s_tenths(c);
    return 16'((16384 * 10 + s10 / 2) / s10);
  endfunction

  function automatic act_t sat_act(logic signed [63:0] v);
    if (v > 64'sd32767)       return 16'sh7fff;
    else if (v < -64'sd32768) return 16'sh8000;
    else                      return act_t'(v[15:0]);
  endfunction

endpackage
