// cordic: iterative rotation-mode CORDIC giving cos and sin of 2*pi*phase.
//
// The Gaussian encoder turns each random projection Bx into the pair
// cos(2*pi*Bx), sin(2*pi*Bx); the paper computes these in its digital core
// with the CORDIC algorithm. This unit takes the phase as an unsigned 16-bit
// fraction of a turn (so the integer part of Bx drops out for free). The top
// two bits select the quadrant; the remaining quarter turn is rotated in ITER
// shift-and-add micro-rotations, one per clock, starting from the vector
// (1/K, 0) so that the CORDIC gain K is cancelled. The quadrant is then
// applied by swapping and negating the two results.
//
// Interface: pulse `start` with `phase`; `busy` is high while rotating and
// `done` pulses for one clock with `cos_o`, `sin_o` (signed Q3.12) held until
// the next start. Latency is ITER + 1 clocks from start to done.
// The iteration count and word widths are this design's choice; the paper
// names the algorithm only.
module cordic
  import nf_pkg::*;
#(
  parameter int unsigned ITER = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] phase,
  output logic        busy,
  output logic        done,
  output act_t        cos_o,
  output act_t        sin_o
);

  // atan(2^-i) in units of 2^-24 turn
  localparam int ATAN_TAB [20] = '{2097152, 1238021, 654136, 332050, 166669,
                                   83416, 41718, 20860, 10430, 5215,
                                   2608, 1304, 652, 326, 163,
                                   81, 41, 20, 10, 5};
  localparam int XINIT = 39797;          // K = 0.607253 in Q.16

  logic signed [19:0] x, y;              // Q.16
  logic signed [25:0] z;                 // residual angle, 2^-24 turn
  logic [1:0]         quad;
  logic [4:0]         it;

  function automatic act_t q16_to_q12(logic signed [19:0] v);
    logic signed [19:0] r;
    r = (v + 20'sd8) >>> 4;
    return act_t'(r[15:0]);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x     <= '0;
      y     <= '0;
      z     <= '0;
      quad  <= '0;
      it    <= '0;
      busy  <= 1'b0;
      done  <= 1'b0;
      cos_o <= '0;
      sin_o <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        x    <= 20'(XINIT);
        y    <= '0;
        z    <= 26'(phase[13:0]) <<< 8;  // quarter-turn residual
        quad <= phase[15:14];
        it   <= '0;
        busy <= 1'b1;
      end else if (busy) begin
        if (32'(it) < ITER) begin
          if (z >= 0) begin
            x <= x - (y >>> it);
            y <= y + (x >>> it);
            z <= z - 26'(ATAN_TAB[it]);
          end else begin
            x <= x + (y >>> it);
            y <= y - (x >>> it);
            z <= z + 26'(ATAN_TAB[it]);
          end
          it <= it + 5'd1;
        end else begin
          busy <= 1'b0;
          done <= 1'b1;
          unique case (quad)
            2'd0: begin cos_o <=  q16_to_q12(x); sin_o <=  q16_to_q12(y); end
            2'd1: begin cos_o <= -q16_to_q12(y); sin_o <=  q16_to_q12(x); end
            2'd2: begin cos_o <= -q16_to_q12(x); sin_o <= -q16_to_q12(y); end
            default: begin cos_o <= q16_to_q12(y); sin_o <= -q16_to_q12(x); end
          endcase
        end
      end
    end
  end

  initial assert (ITER <= 20) else $error("cordic: ITER above table length");

endmodule
