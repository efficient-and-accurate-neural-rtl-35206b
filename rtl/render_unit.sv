// render_unit: volume-rendering accumulator for one camera ray.
//
// A pixel's colour is the quadrature sum over the N samples along its ray
//     C = sum_i T_i * (1 - exp(-sigma_i * delta_i)) * c_i,
//     T_1 = 1,  T_{i+1} = T_i * exp(-sigma_i * delta_i),
// where sigma_i is the density and c_i the colour the MLP produced for sample
// i and delta_i the distance to the next sample. The paper places this
// rendering in the digital core ("Render Unit"); the arithmetic below is this
// design's. exp(-x) is computed as 2^(-x*log2 e): the integer part of the
// exponent is a right shift, the fractional part (16 bits) indexes a
// 256-entry table of 2^(-f/256) in Q1.16 that is built at elaboration, with
// linear interpolation on the low 8 bits (without it, truncating the
// exponent to 1/256 under-counts the absorption of many thin samples).
//
// Interface: one sample per clock on s_valid with sigma, delta (Q3.12,
// sigma >= 0 expected; negative values count as 0), rgb[3] (Q3.12) and the
// flags first (restart T at 1, clear the sums) and last. The clock after the
// last sample, pix_valid pulses with pix_rgb[3] (Q3.12, saturated) and
// trans, the remaining transmittance (Q1.16).
module render_unit
  import nf_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        s_valid,
  input  logic        s_first,
  input  logic        s_last,
  input  act_t        sigma,
  input  act_t        delta,
  input  act_t        rgb [3],
  output logic        pix_valid,
  output act_t        pix_rgb [3],
  output logic [16:0] trans
);

  localparam int LOG2E_Q12 = 5909;       // log2(e) * 4096

  logic [16:0] lut [256];
  for (genvar i = 0; i < 256; i++) begin : g_lut
    localparam real V = 2.0 ** (-real'(i) / 256.0);
    assign lut[i] = 17'($rtoi(V * 65536.0 + 0.5));
  end

  logic [16:0]        t_cur;             // transmittance before this sample
  logic signed [31:0] acc [3];           // colour sums, Q.28

  logic [15:0]        sig_pos, del_pos;
  logic [31:0]        sd;                // sigma*delta, Q.24
  logic [47:0]        ex;                // exponent in base 2, Q.16
  logic [16:0]        lo, hi;            // table entries either side
  logic [24:0]        dif;
  logic [16:0]        e_frac;            // 2^(-fraction), Q1.16
  logic [16:0]        e_val;             // exp(-sigma*delta), Q1.16
  logic [16:0]        t_in;
  logic [16:0]        alpha;
  logic [33:0]        w;                 // T * alpha, Q.32
  logic [16:0]        t_next;

  always_comb begin
    sig_pos = sigma[15] ? 16'd0 : 16'(sigma);
    del_pos = delta[15] ? 16'd0 : 16'(delta);
    sd      = 32'(sig_pos) * 32'(del_pos);
    ex      = (48'(sd) * 48'(LOG2E_Q12)) >> 20;
    lo      = lut[ex[15:8]];
    hi      = (ex[15:8] == 8'd255) ? 17'h08000 : lut[ex[15:8] + 8'd1];
    dif     = (25'(lo - hi) * 25'(ex[7:0])) >> 8;
    e_frac  = lo - 17'(dif);
    if (ex[47:16] >= 32'd17) e_val = '0;
    else                     e_val = e_frac >> ex[20:16];
    t_in    = s_first ? 17'h10000 : t_cur;
    alpha   = 17'h10000 - e_val;
    w       = 34'(t_in) * 34'(alpha);
    t_next  = 17'((34'(t_in) * 34'(e_val)) >> 16);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_cur     <= 17'h10000;
      pix_valid <= 1'b0;
      trans     <= '0;
      for (int k = 0; k < 3; k++) begin
        acc[k]     <= '0;
        pix_rgb[k] <= '0;
      end
    end else begin
      pix_valid <= 1'b0;
      if (s_valid) begin
        logic signed [31:0] nacc [3];
        for (int k = 0; k < 3; k++) begin
          logic signed [47:0] term;
          term    = 48'(w >> 16) * 48'(rgb[k]);          // Q.16 * Q.12 = Q.28
          nacc[k] = (s_first ? 32'sd0 : acc[k]) + 32'(term);
          acc[k] <= nacc[k];
        end
        t_cur <= t_next;
        if (s_last) begin
          pix_valid <= 1'b1;
          trans     <= t_next;
          for (int k = 0; k < 3; k++)
            pix_rgb[k] <= sat_act(64'(nacc[k] >>> 16));
        end
      end
    end
  end

endmodule
