// tb_kmm_post_adder: self-checking testbench of the KMM post-adder.
//
// Builds real sub-products: for X random element pairs of width W it splits
// each operand into its upper digit (bits W-1:H) and lower digit (bits H-1:0),
// H = ceil(W/2), and sums the digit products C1 = sum a1*b1, C0 = sum a0*b0
// and Cs = sum (a1+a0)*(b1+b0) over the X pairs. The unit must return the
// full dot product sum a*b. Three instances cover an even width (32, the
// KMM_2^[32] size), an odd width (13) and a width whose digits differ (9).
// The unit is combinational, so no latency is checked.
module tb_kmm_post_adder;
  localparam int Y = 4, X = 32, WA = 5;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  function automatic logic [127:0] rnd(int w);
    logic [127:0] v = {$urandom, $urandom, $urandom, $urandom};
    return v & ((128'(1) << w) - 1);
  endfunction

  for (genvar g = 0; g < 3; g++) begin : g_w
    localparam int W   = (g == 0) ? 32 : (g == 1) ? 13 : 9;
    localparam int H   = (W + 1) / 2;
    localparam int CW1 = 2*(W/2) + WA, CWS = 2*(H+1) + WA, CW0 = 2*H + WA, OW = 2*W + WA;
    logic [Y-1:0][CW1-1:0] c1;
    logic [Y-1:0][CWS-1:0] cs;
    logic [Y-1:0][CW0-1:0] c0;
    logic [Y-1:0][OW-1:0]  c;
    logic [127:0]          exp_c [Y];

    kmm_post_adder #(.W(W), .Y(Y), .WA(WA)) dut (.c1(c1), .cs(cs), .c0(c0), .c(c));

    task automatic trial(input bit maxed);
      logic [127:0] a, b, a1, a0, b1, b0, s1, ss, s0;
      for (int y = 0; y < Y; y++) begin
        s1 = 0; ss = 0; s0 = 0; exp_c[y] = 0;
        for (int k = 0; k < X; k++) begin
          a = maxed ? (128'(1) << W) - 1 : rnd(W);
          b = maxed ? (128'(1) << W) - 1 : rnd(W);
          a1 = a >> H; a0 = a & ((128'(1) << H) - 1);
          b1 = b >> H; b0 = b & ((128'(1) << H) - 1);
          s1 += a1 * b1; s0 += a0 * b0; ss += (a1 + a0) * (b1 + b0);
          exp_c[y] += a * b;
        end
        c1[y] = CW1'(s1); cs[y] = CWS'(ss); c0[y] = CW0'(s0);
      end
      #1;
      for (int y = 0; y < Y; y++) begin
        checks++;
        if (128'(c[y]) != exp_c[y]) begin
          failures++;
          $display("W=%0d elem %0d: got %0h expected %0h", W, y, c[y], exp_c[y]);
        end
      end
    endtask

    initial begin
      trial(1'b1);
      for (int n = 0; n < 200; n++) trial(1'b0);
    end
  end

  initial begin
    #5000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
