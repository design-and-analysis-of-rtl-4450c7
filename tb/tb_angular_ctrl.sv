// tb_angular_ctrl -- sweeps every mode from -14 to 80 and every row 0..63
// and compares k, i0 and the flags with the reference angle table.
module tb_angular_ctrl;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;

  logic signed [7:0]  mode;
  logic [5:0]         y;
  logic [4:0]         k;
  logic signed [12:0] i0;
  logic               dir_ok, waip, hor;

  angular_ctrl dut (.mode(mode), .y(y), .k(k), .i0(i0), .dir_ok(dir_ok), .waip(waip), .hor(hor));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = -16; m <= 82; m++)
      for (int yy = 0; yy < 64; yy++) begin
        int a, pos, ek, ei;
        bit edir, ewaip, ehor;
        mode = 8'(m);
        y = 6'(yy);
        #1;
        edir  = (m >= -14 && m <= -1) || (m >= 2 && m <= 80);
        a     = edir ? ANGLE[m + 14] : 0;
        ewaip = edir && (m < 2 || m > 66);
        ehor  = edir && m < 34;
        pos   = (yy + 1) * a;
        ek    = pos & 31;
        ei    = (pos - ek) / 32;   // floor division
        checks++;
        if (int'(k) != ek || int'(i0) != ei || dir_ok != edir || waip != ewaip || hor != ehor) begin
          failures++;
          if (failures < 20)
            $display("FAIL mode %0d y %0d: k %0d/%0d i0 %0d/%0d dir %0d/%0d waip %0d/%0d hor %0d/%0d",
                     m, yy, k, ek, i0, ei, dir_ok, edir, waip, ewaip, hor, ehor);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
