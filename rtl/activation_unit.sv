// activation_unit: the digital non-linearities that follow each analog
// matrix multiplication.
//
// The networks in the paper use ReLU (NeRF hidden layers and density),
// sigmoid (colour outputs of the dynamic-scene canonical network), sine
// (SIREN hidden layer of the CT network) and no activation (low-rank U
// factors, deformation output). This unit provides all four on a signed
// Q3.12 value:
//   ACT_NONE    y = x
//   ACT_RELU    y = max(x, 0)
//   ACT_SIGMOID piecewise-linear approximation with four segments per side
//               (slopes 1/4, 1/8, 1/32 and 0, break points at 1, 2.375 and 5;
//               maximum error about 0.02). The paper does not say how its
//               sigmoid is computed; this approximation is this design's.
//   ACT_SINE    y = sin(x), x in radians; the phase x/(2*pi) feeds a CORDIC.
// Interface: in_valid/in_ready with x and fn; out_valid pulses with y. ReLU,
// none and sigmoid take one clock; sine takes ITER + 3 clocks. One value is
// in flight at a time.
module activation_unit
  import nf_pkg::*;
#(
  parameter int unsigned ITER = 16
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  output logic    in_ready,
  input  act_t    x,
  input  act_fn_e fn,
  output logic    out_valid,
  output act_t    y
);

  localparam int INV_2PI_Q16 = 10430;    // 2^16 / (2*pi)

  logic        sine_busy;
  logic        c_start, c_busy, c_done;
  logic [15:0] c_phase;
  act_t        c_cos, c_sin;

  function automatic act_t sigmoid_pwl(act_t v);
    logic signed [17:0] a, f;
    a = (v < 0) ? -18'(v) : 18'(v);
    if (a >= 18'sd20480)      f = 18'sd4096;                       // |x| >= 5
    else if (a >= 18'sd9728)  f = (a >>> 5) + 18'sd3456;           // 0.03125|x| + 0.84375
    else if (a >= 18'sd4096)  f = (a >>> 3) + 18'sd2560;           // 0.125|x| + 0.625
    else                      f = (a >>> 2) + 18'sd2048;           // 0.25|x| + 0.5
    if (v < 0) f = 18'sd4096 - f;
    return act_t'(f[15:0]);
  endfunction

  logic signed [31:0] ph_prod;
  assign ph_prod = 32'(x) * 32'(INV_2PI_Q16);

  assign in_ready = !sine_busy;
  assign c_start  = in_valid && in_ready && (fn == ACT_SINE);
  assign c_phase  = ph_prod[27:12];

  cordic #(.ITER(ITER)) u_cordic (
    .clk, .rst_n, .start(c_start), .phase(c_phase),
    .busy(c_busy), .done(c_done), .cos_o(c_cos), .sin_o(c_sin)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sine_busy <= 1'b0;
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        unique case (fn)
          ACT_NONE:    begin y <= x;                      out_valid <= 1'b1; end
          ACT_RELU:    begin y <= (x < 0) ? '0 : x;       out_valid <= 1'b1; end
          ACT_SIGMOID: begin y <= sigmoid_pwl(x);         out_valid <= 1'b1; end
          default:     sine_busy <= 1'b1;
        endcase
      end
      if (sine_busy && c_done) begin
        sine_busy <= 1'b0;
        y         <= c_sin;
        out_valid <= 1'b1;
      end
    end
  end

endmodule
