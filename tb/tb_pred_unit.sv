// tb_pred_unit -- checks prediction units against the reference model:
// a single-sample unit with 16-row averaging (the default), a 4-sample
// parallel unit with 8-row averaging and an 8-sample exact unit. Reference
// windows are random, all-maximum or alternating 0 / max (which drives fC
// past both clip limits); filter and row are random.
module tb_pred_unit;
  import tb_ref_pkg::*;
  import intra_pkg::*;
  localparam int BD = 10;
  int checks = 0, failures = 0;
  int clip_hi = 0, clip_lo = 0;

  logic [BD-1:0] win [11];
  filt_e         filt;
  logic [4:0]    k;

  logic [BD-1:0] w1 [4], w4 [7];
  logic [BD-1:0] q1 [1], q4 [4], q8 [8];

  always_comb begin
    for (int i = 0; i < 4; i++) w1[i] = win[i];
    for (int i = 0; i < 7; i++) w4[i] = win[i];
  end

  pred_unit #(.BIT_DEPTH(BD))                          u1 (.ref_win(w1),  .filt(filt), .k(k), .pred(q1));
  pred_unit #(.BIT_DEPTH(BD), .N_AVG(8), .SAMPLES(4)) u4 (.ref_win(w4),  .filt(filt), .k(k), .pred(q4));
  pred_unit #(.BIT_DEPTH(BD), .N_AVG(1), .SAMPLES(8)) u8 (.ref_win(win), .filt(filt), .k(k), .pred(q8));

  task automatic chk(string name, int n, int x, logic [BD-1:0] got);
    int e, u;
    bit fg;
    fg = (filt == FILT_FG);
    e = prediction(win[x], win[x+1], win[x+2], win[x+3], fg, int'(k), n, BD);
    u = unclipped(win[x], win[x+1], win[x+2], win[x+3], fg, int'(k), n);
    if (u > 1023) clip_hi++;
    if (u < 0) clip_lo++;
    checks++;
    if (int'(got) != e) begin
      failures++;
      $display("FAIL %s sample %0d filt=%0d k=%0d got %0d expected %0d", name, x, filt, k, got, e);
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
    for (int it = 0; it < 3000; it++) begin
      int kind;
      kind = it % 4;
      for (int i = 0; i < 11; i++)
        case (kind)
          0, 1:    win[i] = BD'($urandom);
          2:       win[i] = ((i + it / 4) % 4 < 2) ? '0 : '1;
          default: win[i] = ((i + it / 4) % 4 == 1 || (i + it / 4) % 4 == 2) ? '1 : '0;
        endcase
      filt = filt_e'($urandom_range(0, 1));
      k = 5'($urandom);
      #1;
      chk("single_n16", 16, 0, q1[0]);
      for (int x = 0; x < 4; x++) chk("par4_n8", 8, x, q4[x]);
      for (int x = 0; x < 8; x++) chk("par8_exact", 1, x, q8[x]);
    end
    checks++;
    if (clip_hi == 0 || clip_lo == 0) begin
      failures++;
      $display("FAIL clip cases not reached: high %0d low %0d", clip_hi, clip_lo);
    end
    $display("clip high %0d, clip low %0d", clip_hi, clip_lo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
