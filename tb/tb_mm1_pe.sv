// tb_mm1_pe: self-checking testbench of one MM1 processing-element group.
//
// Drives random A rows, random partial sums and random B tiles through one
// group of P = 4 multipliers. A new B vector is shifted into the shadow
// register while the previous one is in use and is swapped in with the load
// flag of the next A row. The expected output is worked out from the
// operand history kept here: c_out at edge n equals the c_in of edge n-1
// plus the dot product of the A row of edge n-2 with the B vector that was
// active for it. Also checks that a and load pass to the next group after one
// cycle and that b_out shows the shadow register.
module tb_mm1_pe;
  localparam int W = 8, P = 4, CW = 2*W + 6;
  localparam int NCYC = 400;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [P-1:0][W-1:0] a_in, a_out, b_in, b_out;
  logic                load_in, load_out, b_shift;
  logic [CW-1:0]       c_in, c_out;

  mm1_pe #(.W(W), .P(P), .CW(CW)) dut (.*);

  int checks = 0, failures = 0;

  // history of the driven values, indexed by the edge that samples them
  logic [P-1:0][W-1:0] a_h [NCYC], bv_h [NCYC];
  logic [CW-1:0]       c_h [NCYC];
  logic                ld_h [NCYC];

  function automatic logic [CW-1:0] dot(logic [P-1:0][W-1:0] a, logic [P-1:0][W-1:0] b);
    logic [CW-1:0] s = '0;
    for (int q = 0; q < P; q++) s += CW'(a[q]) * CW'(b[q]);
    return s;
  endfunction

  initial begin
    logic [P-1:0][W-1:0] shadow, active;
    int since_load;
    a_in = '0; load_in = 0; b_shift = 0; b_in = '0; c_in = '0;
    shadow = '0; active = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < NCYC; n++) begin
      // drive the inputs of edge n
      for (int q = 0; q < P; q++) a_in[q] = W'($urandom);
      if (n < 4) for (int q = 0; q < P; q++) a_in[q] = '1;      // largest operands first
      c_in    = CW'($urandom) & ((CW'(1) << (CW-1)) - 1);
      b_shift = ($urandom % 3) != 0;
      for (int q = 0; q < P; q++) b_in[q] = (n < 4) ? '1 : W'($urandom);
      load_in = ($urandom % 7) == 0 || n == 1;
      a_h[n] = a_in; c_h[n] = c_in; ld_h[n] = load_in;
      // active B vector used by the product of the row sampled at edge n
      if (load_in) active = shadow;
      bv_h[n] = active;
      if (b_shift) shadow = b_in;
      @(posedge clk);
      #1;
      checks++;
      if (a_out != a_h[n] || load_out != ld_h[n]) begin
        failures++; $display("edge %0d: a/load not forwarded", n);
      end
      checks++;
      if (b_out != shadow) begin
        failures++; $display("edge %0d: shadow %h expected %h", n, b_out, shadow);
      end
      if (n >= 1) begin
        checks++;
        if (c_out != c_h[n] + dot(a_h[n-1], bv_h[n-1])) begin
          failures++;
          $display("edge %0d: c_out %0d expected %0d", n, c_out, c_h[n] + dot(a_h[n-1], bv_h[n-1]));
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NCYC + 100) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
