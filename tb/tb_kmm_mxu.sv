// tb_kmm_mxu: self-checking testbench of the fixed-precision KMM MXU.
//
// Runs three kmm_mxu instances through kmm_mxu_harness: KMM_2 on 16-bit
// inputs, KMM_2 on odd 13-bit inputs (the upper-digit shift is 2*ceil(w/2)),
// and KMM_4 on 64-bit inputs, which nests two levels of Karatsuba recursion
// and meets odd digit widths (33 and 17 bits) inside. Each harness compares
// every output element with an exact product and checks the latency.
module tb_kmm_mxu;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int c0, f0, c1, f1, c2, f2;
  logic d0, d1, d2;
  kmm_mxu_harness #(.W(16), .N(2)) h0 (.clk, .rst_n, .checks(c0), .failures(f0), .done(d0));
  kmm_mxu_harness #(.W(13), .N(2)) h1 (.clk, .rst_n, .checks(c1), .failures(f1), .done(d1));
  kmm_mxu_harness #(.W(64), .N(4)) h2 (.clk, .rst_n, .checks(c2), .failures(f2), .done(d2));

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    wait (d0 && d1 && d2);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2 + 1);
    $finish;
  end
endmodule
