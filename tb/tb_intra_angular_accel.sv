// tb_intra_angular_accel -- end-to-end test of the accelerator.
//
// The testbench plays the reference sample buffer: it keeps a line of
// reference samples, reads each unit's offset i0 from ref_ofs and returns
// the window starting at BASE + xb + i0 in the same cycle, where xb is the
// unit's first column in a 64-sample-wide block. Every cycle each unit gets
// a random mode (all of -16..82, so planar, DC and out-of-range modes
// occur), a random row and a random filter; in_valid is dropped at random.
// The reference line alternates between random samples and 0 / max
// patterns that push the DCT filter past both clip limits. Expected samples
// come from the reference model and are compared one cycle later, which
// also checks the one-cycle latency and the full per-cycle throughput.
// Every mechanism counted below must occur at least once.
module tb_intra_angular_accel;
  import tb_ref_pkg::*;
  localparam int BD   = 10;
  localparam int NAVG = 16;
  localparam int TS   = 32;
  localparam int SPU  = 4;
  localparam int NU   = TS / SPU;
  localparam int NW   = SPU + 3;
  localparam int NCYC = 400;
  localparam int BASE = 128;
  localparam int LINE = 1536;

  int checks = 0, failures = 0;
  int n_fc = 0, n_fg = 0, n_clip_hi = 0, n_clip_lo = 0, n_waip = 0, n_nondir = 0;
  int n_neg_ofs = 0, n_int_pos = 0, n_hor = 0, n_idle = 0, n_ops = 0;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic signed [7:0]  mode  [NU];
  logic [5:0]         row_y [NU];
  logic [NU-1:0]      filt_sel;
  logic signed [12:0] ref_ofs [NU];
  logic [NU-1:0]      ref_hor, ref_waip;
  logic [BD-1:0]      ref_win [NU][NW];
  logic               out_valid;
  logic [NU-1:0]      out_dir_ok;
  logic [BD-1:0]      pred [TS];

  logic [BD-1:0] line [LINE];

  intra_angular_accel #(
    .BIT_DEPTH(BD), .N_AVG(NAVG), .TOTAL_SAMPLES(TS), .SAMPLES_PER_UNIT(SPU)
  ) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .mode(mode), .row_y(row_y),
    .filt_sel(filt_sel), .ref_ofs(ref_ofs), .ref_hor(ref_hor), .ref_waip(ref_waip),
    .ref_win(ref_win), .out_valid(out_valid), .out_dir_ok(out_dir_ok), .pred(pred)
  );

  always #5 clk = ~clk;

  // Reference sample buffer model.
  always_comb begin
    for (int u = 0; u < NU; u++)
      for (int t = 0; t < NW; t++)
        ref_win[u][t] = line[BASE + ((u * SPU) % 64) + int'(ref_ofs[u]) + t];
  end

  // Expected results of the cycle just driven.
  int  exp_pred [TS];
  bit  exp_dir  [NU];
  bit  exp_valid;

  task automatic fill_line(int kind);
    for (int i = 0; i < LINE; i++)
      case (kind)
        0:       line[i] = BD'($urandom);
        1:       line[i] = ((i % 4) < 2) ? '0 : '1;
        default: line[i] = ((i % 4) == 1 || (i % 4) == 2) ? '1 : '0;
      endcase
  endtask

  task automatic drive_cycle(bit v);
    in_valid = v;
    fill_line($urandom_range(0, 3) == 0 ? 1 : ($urandom_range(0, 3) == 0 ? 2 : 0));
    for (int u = 0; u < NU; u++) begin
      mode[u]     = 8'($signed($urandom_range(0, 98)) - 16);
      row_y[u]    = 6'($urandom);
      filt_sel[u] = 1'($urandom);
    end
    #1;
    exp_valid = v;
    for (int u = 0; u < NU; u++) begin
      int m, a, pos, kk, i0, xb;
      bit dir;
      m   = int'(mode[u]);
      dir = (m >= -14 && m <= -1) || (m >= 2 && m <= 80);
      a   = dir ? ANGLE[m + 14] : 0;
      pos = (int'(row_y[u]) + 1) * a;
      kk  = pos & 31;
      i0  = (pos - kk) / 32;
      xb  = (u * SPU) % 64;
      exp_dir[u] = dir;
      if (dir) begin
        checks++;
        if (int'(ref_ofs[u]) != i0 || ref_waip[u] != (m < 2 || m > 66) || ref_hor[u] != (m < 34)) begin
          failures++;
          $display("FAIL unit %0d mode %0d: ref_ofs %0d expected %0d", u, m, ref_ofs[u], i0);
        end
      end
      for (int s = 0; s < SPU; s++) begin
        int b, e, un;
        b  = BASE + xb + i0 + s;
        e  = prediction(line[b], line[b+1], line[b+2], line[b+3], filt_sel[u], kk, NAVG, BD);
        un = unclipped(line[b], line[b+1], line[b+2], line[b+3], filt_sel[u], kk, NAVG);
        exp_pred[u*SPU + s] = dir ? e : 0;
        if (v && dir) begin
          if (un > (1 << BD) - 1) n_clip_hi++;
          if (un < 0) n_clip_lo++;
        end
      end
      if (v) begin
        if (!dir) n_nondir++;
        else begin
          if (filt_sel[u]) n_fg++; else n_fc++;
          if (m < 2 || m > 66) n_waip++;
          if (m < 34) n_hor++;
          if (i0 < 0) n_neg_ofs++;
          if (kk == 0) n_int_pos++;
        end
      end
    end
    if (v) n_ops++; else n_idle++;
  endtask

  task automatic check_outputs();
    checks++;
    if (out_valid != exp_valid) begin
      failures++;
      $display("FAIL out_valid %0d expected %0d", out_valid, exp_valid);
    end
    if (!exp_valid) return;
    for (int u = 0; u < NU; u++) begin
      checks++;
      if (out_dir_ok[u] != exp_dir[u]) begin
        failures++;
        $display("FAIL out_dir_ok[%0d]", u);
      end
    end
    for (int i = 0; i < TS; i++) begin
      checks++;
      if (int'(pred[i]) != exp_pred[i]) begin
        failures++;
        if (failures < 20) $display("FAIL sample %0d got %0d expected %0d", i, pred[i], exp_pred[i]);
      end
    end
  endtask

  task automatic need(string what, int n);
    checks++;
    $display("  %-28s %0d", what, n);
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    repeat (NCYC * 2 + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int u = 0; u < NU; u++) begin
      mode[u] = '0; row_y[u] = '0;
    end
    filt_sel = '0;
    fill_line(0);
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    // Reset leaves no valid output behind.
    checks++;
    if (out_valid !== 1'b0) begin
      failures++;
      $display("FAIL out_valid after reset");
    end
    for (int c = 0; c < NCYC; c++) begin
      drive_cycle($urandom_range(0, 4) != 0);
      @(posedge clk);
      #1;
      check_outputs();
      @(negedge clk);
    end
    $display("mechanism counts:");
    need("fC filter (DCT)", n_fc);
    need("fG filter (smoothing)", n_fg);
    need("clip at maximum", n_clip_hi);
    need("clip at zero", n_clip_lo);
    need("wide-angle mode", n_waip);
    need("horizontal-class mode", n_hor);
    need("non-directional mode", n_nondir);
    need("negative reference offset", n_neg_ofs);
    need("integer position (k = 0)", n_int_pos);
    need("idle cycle", n_idle);
    need("operations", n_ops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
