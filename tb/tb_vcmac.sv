// tb_vcmac: self-checking test of the VCMAC model.
// Checks the significance ratio of every switch code against the mirror
// ratios (s = 1 + 0.8 C4 + 0.4 C3 + 0.2 C2 + 0.1 C1, 1.0 .. 2.5), then, for
// random bit counts and column currents, compares the output with
// sum_i I_i * s^(n-1-i) computed in real arithmetic and clipped to the
// 48-bit range (relative error 1e-6 plus
// the truncation of one LSB per stage). A single-column input (n = 1) must
// pass through unchanged.
module tb_vcmac;
  import nf_pkg::*;

  cur_t            i_in [NB_MAX];
  logic [NB_W-1:0] nbits;
  scode_t          c_sw;
  cur_t            i_out;
  int checks = 0, failures = 0;

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  vcmac dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real s, ref_v;
    for (int i = 0; i < int'(NB_MAX); i++) i_in[i] = '0;
    // ratio per code: two columns, bit[0] = 1000, bit[1] = 0 -> 100*s*10
    for (int cs = 0; cs < 16; cs++) begin
      real exp_s;
      exp_s = 1.0 + 0.8 * (cs >> 3 & 1) + 0.4 * (cs >> 2 & 1) + 0.2 * (cs >> 1 & 1) + 0.1 * (cs & 1);
      c_sw = scode_t'(cs);
      nbits = 2;
      i_in[0] = 48'sd1000000;
      i_in[1] = 48'sd0;
      #1;
      checks++;
      if (fabs(real'(i_out) - 1.0e6 * exp_s) > 1.0) begin
        failures++;
        $display("code %0d: out %0d exp %f", cs, i_out, 1.0e6 * exp_s);
      end
    end
    for (int t = 0; t < 500; t++) begin
      int n;
      n = 1 + int'($urandom % NB_MAX);
      nbits = NB_W'(n);
      c_sw = scode_t'($urandom);
      s = real'(s_tenths(c_sw)) / 10.0;
      ref_v = 0.0;
      for (int i = 0; i < int'(NB_MAX); i++) begin
        i_in[i] = cur_t'($signed($urandom % 2000001) - 1000000) * 1000;
        if (i < n) ref_v = ref_v * s + real'(i_in[i]);
      end
      if (ref_v > 140737488355327.0) ref_v = 140737488355327.0;
      if (ref_v < -140737488355328.0) ref_v = -140737488355328.0;
      #1;
      checks++;
      if (fabs(real'(i_out) - ref_v) > fabs(ref_v) * 1e-6 + 3.0 * n) begin
        failures++;
        $display("n %0d s %f: out %0d exp %f", n, s, i_out, ref_v);
      end
      if (n == 1) begin
        checks++;
        if (i_out != i_in[0]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
