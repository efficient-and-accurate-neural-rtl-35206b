// adc: BEHAVIOURAL MODEL of the source-line analog-to-digital converter
// (the paper's platform uses a 14-bit converter behind trans-impedance
// amplifiers).
//
// The model samples a signed current (20 fractional bits, see nf_pkg) on
// `sample`, divides it by 2^shift (this stands for the amplifier gain and the
// converter's full scale, which the paper does not give), rounds toward minus
// infinity and saturates to a signed ADC_BITS code. The code appears on
// `code` with `valid` one clock after `sample`.
module adc
  import nf_pkg::*;
#(
  parameter int unsigned ADC_BITS = ADC_W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       sample,
  input  cur_t                       cur,
  input  logic [5:0]                 shift,
  output logic                       valid,
  output logic signed [ADC_BITS-1:0] code
);

  localparam longint MAXC = (64'sd1 <<< (ADC_BITS - 1)) - 1;
  localparam longint MINC = -(64'sd1 <<< (ADC_BITS - 1));

  logic signed [CUR_W-1:0] scaled;
  assign scaled = cur >>> shift;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= 1'b0;
      code  <= '0;
    end else begin
      valid <= sample;
      if (sample) begin
        if (64'(scaled) > MAXC)      code <= ADC_BITS'(MAXC);
        else if (64'(scaled) < MINC) code <= ADC_BITS'(MINC);
        else                         code <= scaled[ADC_BITS-1:0];
      end
    end
  end

endmodule
