// tb_kmm_mxu_table3: the fixed-precision KMM MXUs at the sizes of the
// paper's fixed-precision comparison.
//
// Two kmm_mxu instances, each driven by kmm_mxu_harness:
//   KMM_2^[32] at its full 32 x 32 size: 32-bit inputs, one Karatsuba
//               level, three 32x32 MM1 arrays on 16, 17 and 16-bit digits
//               (the module's default size);
//   KMM_4^[64] at 8 x 8 (the 32 x 32 size takes over ten minutes to build):
//               64-bit inputs, two levels, nine MM1 arrays on digits of
//               16 to 18 bits, with odd 33-bit digits between the levels.
// Four tiles of 64 A rows stream back to back with overlapped B loads; every
// result (up to 2*64 + 5 = 133 bits) is compared with an exact product and
// its arrival cycle with the latency X/P + 3 + r.
module tb_kmm_mxu_table3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int c0, f0, c1, f1;
  logic d0, d1;
  kmm_mxu_harness #(.W(32), .N(2), .X(32), .Y(32)) h32 (.clk, .rst_n, .checks(c0), .failures(f0), .done(d0));
  kmm_mxu_harness #(.W(64), .N(4), .X(8), .Y(8)) h64 (.clk, .rst_n, .checks(c1), .failures(f1), .done(d1));

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    wait (d0 && d1);
    $display("KMM_2^[32]: %0d checks, %0d failures; KMM_4^[64]: %0d checks, %0d failures", c0, f0, c1, f1);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1 + 1);
    $finish;
  end
endmodule
