// intra_angular_accel -- approximate VVC intra angular prediction
// accelerator that predicts TOTAL_SAMPLES luma samples per clock cycle.
//
// The accelerator is TOTAL_SAMPLES / SAMPLES_PER_UNIT identical pred_unit
// instances working side by side. Each unit gets, every cycle, a mode, a row
// index y and a filter choice; its angular_ctrl turns mode and y into the
// coefficient row k and the reference offset i0. i0 goes out on ref_ofs so
// that the reference sample buffer (outside this design) can return the
// unit's reference window in the same cycle on ref_win; ref_hor and
// ref_waip tell it whether the unit reads the left column (horizontal-class
// mode) and whether the mode is a wide-angle one. The unit computes
// its samples with MCM blocks whose coefficient set is the N_AVG-row
// averaged filter table (N_AVG = 1 gives exact prediction), and the results
// are registered.
//
// Timing: one operation per cycle, no stalls. The inputs of cycle t (with
// in_valid) give pred, out_valid and out_dir_ok after the clock edge that
// ends cycle t, i.e. a latency of one cycle and a throughput of
// TOTAL_SAMPLES samples per cycle. out_dir_ok[u] is low for a unit whose
// mode was not directional (planar, DC, out of range); its samples then
// hold zero. rst_n is an active-low synchronous reset of the output
// register.
//
// Following the paper: 512 samples per cycle from equal units, single-sample
// or parallel units, MCM blocks with averaged coefficients, Eq. (1). This
// design's own choices: the default N_AVG = 16 (the example the paper
// draws), 10-bit samples, the one-cycle register, the port layout, and the
// filter selection (fC or fG) arriving as an input because the paper does
// not give the rule.
module intra_angular_accel
  import intra_pkg::*;
#(
  parameter int unsigned BIT_DEPTH        = 10,
  parameter int unsigned N_AVG            = 16,
  parameter int unsigned TOTAL_SAMPLES    = 512,
  parameter int unsigned SAMPLES_PER_UNIT = 1,
  localparam int unsigned NU              = TOTAL_SAMPLES / SAMPLES_PER_UNIT,
  localparam int unsigned NW              = SAMPLES_PER_UNIT + 3
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic signed [7:0]           mode      [NU],
  input  logic [5:0]                  row_y     [NU],
  input  logic [NU-1:0]               filt_sel,          // 1 = smoothing filter fG
  output logic signed [12:0]          ref_ofs   [NU],     // i0 of each unit
  output logic [NU-1:0]               ref_hor,            // unit reads the left column
  output logic [NU-1:0]               ref_waip,           // unit runs a wide-angle mode
  input  logic [BIT_DEPTH-1:0]        ref_win   [NU][NW],
  output logic                        out_valid,
  output logic [NU-1:0]               out_dir_ok,
  output logic [BIT_DEPTH-1:0]        pred      [TOTAL_SAMPLES]
);

  logic [BIT_DEPTH-1:0] pred_d [TOTAL_SAMPLES];
  logic [NU-1:0]        dir_ok;

  for (genvar u = 0; u < int'(NU); u++) begin : g_unit
    logic [4:0]           k;
    logic [BIT_DEPTH-1:0] p [SAMPLES_PER_UNIT];

    angular_ctrl u_ctrl (
      .mode  (mode[u]),
      .y     (row_y[u]),
      .k     (k),
      .i0    (ref_ofs[u]),
      .dir_ok(dir_ok[u]),
      .waip  (ref_waip[u]),
      .hor   (ref_hor[u])
    );

    pred_unit #(
      .BIT_DEPTH(BIT_DEPTH),
      .N_AVG    (N_AVG),
      .SAMPLES  (SAMPLES_PER_UNIT)
    ) u_pred (
      .ref_win(ref_win[u]),
      .filt   (filt_e'(filt_sel[u])),
      .k      (k),
      .pred   (p)
    );

    for (genvar s = 0; s < int'(SAMPLES_PER_UNIT); s++) begin : g_s
      assign pred_d[u*SAMPLES_PER_UNIT + s] = dir_ok[u] ? p[s] : '0;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_dir_ok <= '0;
      pred       <= '{default: '0};
    end else begin
      out_valid  <= in_valid;
      out_dir_ok <= in_valid ? dir_ok : '0;
      if (in_valid) pred <= pred_d;
    end
  end

  initial assert (TOTAL_SAMPLES % SAMPLES_PER_UNIT == 0)
    else $error("intra_angular_accel: TOTAL_SAMPLES must be a multiple of SAMPLES_PER_UNIT");

endmodule
