// tb_mcm_block -- checks the MCM block for several coefficient sets.
//
// Instances: the four single-tap blocks of the 16-row averaged design, whose
// coefficient sets are known from the worked example ({-3,-2,12,4},
// {53,18,28,20}, {16,51,19,27}, {-2,-3,3,11} for taps 0..3), an exact-table
// block serving all taps, and a 32-row averaged block serving taps 1 and 2.
// For random and extreme inputs every output must equal c * x for the
// coefficients the block serves and 0 elsewhere.
module tb_mcm_block;
  import tb_ref_pkg::*;
  localparam int BD = 10;
  int checks = 0, failures = 0;

  logic [BD-1:0] x;
  logic signed [BD+7:0] p0 [-64:64], p1 [-64:64], p2 [-64:64], p3 [-64:64];
  logic signed [BD+7:0] pe [-64:64], pt [-64:64];

  mcm_block #(.BIT_DEPTH(BD), .N_AVG(16), .COL_MASK(4'b0001)) u0 (.x(x), .prod(p0));
  mcm_block #(.BIT_DEPTH(BD), .N_AVG(16), .COL_MASK(4'b0010)) u1 (.x(x), .prod(p1));
  mcm_block #(.BIT_DEPTH(BD), .N_AVG(16), .COL_MASK(4'b0100)) u2 (.x(x), .prod(p2));
  mcm_block #(.BIT_DEPTH(BD), .N_AVG(16), .COL_MASK(4'b1000)) u3 (.x(x), .prod(p3));
  mcm_block #(.BIT_DEPTH(BD), .N_AVG(1),  .COL_MASK(4'b1111)) ue (.x(x), .prod(pe));
  mcm_block #(.BIT_DEPTH(BD), .N_AVG(32), .COL_MASK(4'b0110)) ut (.x(x), .prod(pt));

  // Set of coefficients of taps in mask, from the reference model.
  function automatic bit in_set(int c, int n, logic [3:0] mask);
    for (int f = 0; f < 2; f++)
      for (int k = 0; k < 32; k++)
        for (int t = 0; t < 4; t++)
          if (mask[t] && coef(f[0], k, t, n) == c) return 1'b1;
    return 1'b0;
  endfunction

  task automatic check_block(string name, int n, logic [3:0] mask,
                             logic signed [BD+7:0] p [-64:64]);
    for (int c = -64; c <= 64; c++) begin
      int e;
      e = in_set(c, n, mask) ? c * int'(x) : 0;
      checks++;
      if (int'(p[c]) != e) begin
        failures++;
        $display("FAIL %s x=%0d c=%0d got %0d expected %0d", name, x, c, p[c], e);
      end
    end
  endtask

  // The n=16 sets as given by the worked example, checked against the
  // reference model (and so against the block through check_block).
  task automatic check_example(int t, int a, int b, int c, int d);
    int cnt;
    logic [3:0] m;
    m = 4'(1 << t);
    cnt = 0;
    for (int v = -64; v <= 64; v++) if (in_set(v, 16, m)) cnt++;
    checks++;
    if (!(in_set(a, 16, m) && in_set(b, 16, m) && in_set(c, 16, m) && in_set(d, 16, m) && cnt == 4)) begin
      failures++;
      $display("FAIL coefficient set of tap %0d", t);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check_example(0, -3, -2, 12, 4);
    check_example(1, 53, 18, 28, 20);
    check_example(2, 16, 51, 19, 27);
    check_example(3, -2, -3, 3, 11);
    for (int i = 0; i < 200; i++) begin
      x = (i == 0) ? '0 : (i == 1) ? '1 : (i == 2) ? BD'(1) : BD'($urandom);
      #1;
      check_block("mcm0_n16", 16, 4'b0001, p0);
      check_block("mcm1_n16", 16, 4'b0010, p1);
      check_block("mcm2_n16", 16, 4'b0100, p2);
      check_block("mcm3_n16", 16, 4'b1000, p3);
      check_block("exact",     1, 4'b1111, pe);
      check_block("n32_t12",  32, 4'b0110, pt);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
