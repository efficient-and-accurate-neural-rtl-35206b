// tb_cordic: self-checking test of the CORDIC sine/cosine unit.
// Drives the four quadrant boundaries and 200 random phases and compares
// cos/sin with $cos/$sin of 2*pi*phase/65536 (tolerance 3 LSB of Q3.12).
// Also checks the ITER + 1 clock latency from start to done.
module tb_cordic;
  import nf_pkg::*;

  logic clk = 0, rst_n = 0;
  logic start = 0;
  logic [15:0] phase = 0;
  logic busy, done;
  act_t cos_o, sin_o;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  cordic #(.ITER(16)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic [15:0] ph);
    real ang, ec, es;
    int lat;
    @(negedge clk);
    phase = ph;
    start = 1;
    @(negedge clk);
    start = 0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    ang = 2.0 * 3.14159265358979 * real'(ph) / 65536.0;
    ec = $cos(ang) * 4096.0;
    es = $sin(ang) * 4096.0;
    checks += 3;
    if (fabs(real'(cos_o) - ec) > 3.0 || fabs(real'(sin_o) - es) > 3.0) begin
      failures++;
      $display("phase %0d: cos %0d (exp %f) sin %0d (exp %f)", ph, cos_o, ec, sin_o, es);
    end
    if (lat != 18) begin  // done rises 17 = ITER+1 edges after the edge that samples start
      failures++;
      $display("latency %0d", lat);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(16'h0000); run(16'h4000); run(16'h8000); run(16'hC000);
    run(16'h2000); run(16'h1555); run(16'hFFFF);
    for (int i = 0; i < 200; i++) run(16'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
