// tb_coef_mux -- checks the control multiplexer. Each product input carries
// a tag unique to its coefficient (1000 * c + 7), so the output shows which
// coefficient was chosen; it must be the reference-model coefficient of the
// requested filter, row and tap for every filter, row, tap and averaging.
module tb_coef_mux;
  import tb_ref_pkg::*;
  import intra_pkg::*;
  localparam int BD = 10;
  int checks = 0, failures = 0;

  logic signed [BD+7:0] prod [-64:64];
  filt_e                filt;
  logic [4:0]           k;
  logic signed [BD+7:0] t16 [4], t2 [4], t1 [4], t32 [4];

  for (genvar c = 0; c < 4; c++) begin : g_col
    coef_mux #(.BIT_DEPTH(BD), .N_AVG(16), .COL(c)) m16 (.prod(prod), .filt(filt), .k(k), .term(t16[c]));
    coef_mux #(.BIT_DEPTH(BD), .N_AVG(2),  .COL(c)) m2  (.prod(prod), .filt(filt), .k(k), .term(t2[c]));
    coef_mux #(.BIT_DEPTH(BD), .N_AVG(1),  .COL(c)) m1  (.prod(prod), .filt(filt), .k(k), .term(t1[c]));
    coef_mux #(.BIT_DEPTH(BD), .N_AVG(32), .COL(c)) m32 (.prod(prod), .filt(filt), .k(k), .term(t32[c]));
  end

  task automatic chk(string name, int n, int c, logic signed [BD+7:0] got);
    int e;
    e = 1000 * coef(filt == FILT_FG, int'(k), c, n) + 7;
    checks++;
    if (int'(got) != e) begin
      failures++;
      $display("FAIL %s filt=%0d k=%0d tap=%0d got %0d expected %0d", name, filt, k, c, got, e);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = -64; c <= 64; c++) prod[c] = 18'(1000 * c + 7);
    for (int f = 0; f < 2; f++)
      for (int kk = 0; kk < 32; kk++) begin
        filt = filt_e'(f);
        k = 5'(kk);
        #1;
        for (int c = 0; c < 4; c++) begin
          chk("n16", 16, c, t16[c]);
          chk("n2",   2, c, t2[c]);
          chk("n1",   1, c, t1[c]);
          chk("n32", 32, c, t32[c]);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
