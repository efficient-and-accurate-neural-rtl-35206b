// vcmac: BEHAVIOURAL MODEL of the Variable Current Multiplicative
// Amplification Circuit.
//
// A weight programmed with hardware-aware quantization occupies nbits adjacent
// source lines, bit[0] (the most significant, weight 1) to bit[n-1] (weight
// (1/s)^(n-1)). The circuit walks the chain from bit[0]: the running current
// is multiplied by the significance ratio s in a bank of current mirrors and
// added to the next line's current, acc_i = s * acc_{i-1} + I_i, so the last
// stage delivers sum_i I_i * s^(n-1-i). The digital side later scales this by
// (1/s)^(n-1).
//
// The mirror bank follows the paper's Fig. 3c: a unity mirror that is always
// on plus mirrors of 0.8, 0.4, 0.2 and 0.1 enabled by switches C4..C1, so
// s = 1 + 0.8 C4 + 0.4 C3 + 0.2 C2 + 0.1 C1 (1.0 to 2.5). The 0.1 current
// scaling at the input and the mirrors' ~1 % gain error are not modelled; the
// scaling is a constant that the ADC full scale absorbs. The output
// saturates at the 48-bit current range (the ADC clips far earlier). The
// model is combinational: i_out follows i_in.
module vcmac
  import nf_pkg::*;
#(
  parameter int unsigned NB = NB_MAX
) (
  input  cur_t             i_in [NB],  // SL currents, i_in[0] = bit[0]
  input  logic [NB_W-1:0]  nbits,      // bits per weight, 1..NB
  input  scode_t           c_sw,       // {C4, C3, C2, C1}
  output cur_t             i_out
);

  localparam cur_t CUR_MAX = {1'b0, {(CUR_W-1){1'b1}}};
  localparam cur_t CUR_MIN = {1'b1, {(CUR_W-1){1'b0}}};

  always_comb begin
    logic signed [CUR_W+7:0] acc;
    int s10;
    s10 = int'(s_tenths(c_sw));
    acc = '0;
    for (int i = 0; i < int'(NB); i++) begin
      if (i < int'(nbits))
        acc = (acc * (CUR_W+8)'(s10)) / (CUR_W+8)'(10) + (CUR_W+8)'(i_in[i]);
    end
    if (acc > (CUR_W+8)'(CUR_MAX))      i_out = CUR_MAX;
    else if (acc < (CUR_W+8)'(CUR_MIN)) i_out = CUR_MIN;
    else                                i_out = cur_t'(acc);
  end

endmodule
