// tb_aed_decoder -- end-to-end testbench of the ensemble decoder at its default
// parameters (M = 4 lanes, P(128,60)).
//
// Random information words are polar encoded, sent over BPSK/AWGN at Eb/N0 from
// 1.5 to 4.5 dB and quantised to 6-bit LLRs.  Frames enter in bursts of back-to-
// back cycles separated by random idle gaps.  For every frame the reference runs
// all M lanes (permute, iterative Fast-SSC with path metric, unpermute) and picks
// the first lane with the lowest metric; the design's code word, metric and lane
// index must match, 11 cycles after the frame was sampled (the latency of Table I).
//
// The mechanisms of the design must each occur, or a failure is counted:
//   - a lane other than the identity lane wins the selection;
//   - the ensemble returns the transmitted code word where the identity lane alone
//     (plain Fast-SSC) does not;
//   - a metric tie between lanes (resolved towards the lower lane);
//   - Rate-0, REP and SPC nodes all contribute to path metrics;
//   - a frame enters in every cycle of a run of at least 8 cycles (full throughput).
// The frame error rates of plain Fast-SSC and of the ensemble are printed, the
// latter also with the conventional ML-in-the-list selection (the code word that
// correlates most with the received LLRs) computed by the testbench from the same
// lane results; the design's path-metric selection must do no worse than that
// (within 1% of the frames).  The selection by correlation is not part of the
// design, which keeps no copy of the received LLRs.
module tb_aed_decoder;
  import aed_pkg::*;
  import fssc_ref_pkg::*;

  localparam int M = 4;          // must equal the design's default
  localparam int NFRAMES = 1500;
  localparam int LAT = 11;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;

  logic         vin = 0, vout;
  llr_t [N-1:0] y;
  logic [N-1:0] xo;
  pm_t          pmo;
  logic [3:0]   selo;

  aed_decoder dut (.clk, .rst_n, .valid_i(vin), .y_i(y),
                   .valid_o(vout), .x_o(xo), .pm_o(pmo), .sel_o(selo));

  int checks = 0, failures = 0, cycle = 0, nout = 0;
  logic [N-1:0] exp_x   [NFRAMES];
  int           exp_pm  [NFRAMES];
  int           exp_sel [NFRAMES];
  int           t_in    [NFRAMES];
  int           stats [5] = '{default: 0};
  int n_sel_other = 0, n_rescued = 0, n_tie = 0, max_burst = 0, burst = 0;
  int err_sc = 0, err_aed = 0, err_ml = 0, n_ml_differs = 0;

  always @(posedge clk) cycle <= cycle + 1;

  initial begin : watchdog
    repeat (NFRAMES * 3 + 200) @(posedge clk);
    failures++;
    $display("watchdog: %0d of %0d frames seen", nout, NFRAMES);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && vout) begin
    checks += 3;
    if (xo != exp_x[nout] || int'(pmo) != exp_pm[nout] || int'(selo) != exp_sel[nout]) begin
      failures++;
      if (failures < 10)
        $display("frame %0d: x ok=%0b pm=%0d/%0d sel=%0d/%0d", nout, xo == exp_x[nout],
                 pmo, exp_pm[nout], selo, exp_sel[nout]);
    end
    if (cycle - t_in[nout] != LAT) begin
      failures++;
      if (failures < 10) $display("frame %0d: latency %0d, expected %0d", nout, cycle - t_in[nout], LAT);
    end
    nout++;
  end

  initial begin
    bit_vec_t fr, u, x, xb;
    llr_vec_t l;
    logic [N-1:0] xp, xtx, xsc;
    llr_t [N-1:0] yv;
    int pm, best_pm, best, corr, best_corr;
    logic [N-1:0] x_ml;
    fr = ref_frozen();
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < NFRAMES; f++) begin
      if ($urandom_range(9) == 0) begin
        burst = 0;
        repeat ($urandom_range(3) + 1) begin
          @(posedge clk);
          vin <= 0;
        end
      end
      for (int i = 0; i < N; i++) u[i] = fr[i] ? 1'b0 : 1'($urandom);
      x = polar_encode(7, u);
      for (int i = 0; i < N; i++) xtx[i] = x[i];
      l = channel(x, 1.5 + 3.0 * real'(f % 7) / 6.0, 60.0 / 128.0, 1.0);
      best = 0;
      best_pm = 1 << 30;
      best_corr = -(1 << 30);
      for (int m = 0; m < M; m++) begin
        ref_lane(m, fr, l, xb, pm, stats);
        for (int i = 0; i < N; i++) xp[i] = xb[i];
        if (m == 0) xsc = xp;
        corr = 0;   // ML-in-the-list: correlation y^T (1 - 2 x_m)
        for (int i = 0; i < N; i++) corr += xp[i] ? -l[i] : l[i];
        if (corr > best_corr) begin
          best_corr = corr;
          x_ml = xp;
        end
        if (pm == best_pm) n_tie++;
        if (pm < best_pm) begin
          best_pm = pm;
          best = m;
          exp_x[f] = xp;
        end
      end
      exp_pm[f]  = best_pm;
      exp_sel[f] = best;
      if (best != 0) n_sel_other++;
      if (xsc != xtx) err_sc++;
      if (exp_x[f] != xtx) err_aed++;
      if (x_ml != xtx) err_ml++;
      if (x_ml != exp_x[f]) n_ml_differs++;
      if (xsc != xtx && exp_x[f] == xtx) n_rescued++;
      for (int i = 0; i < N; i++) yv[i] = llr_t'(l[i]);
      @(posedge clk);
      vin <= 1;
      y   <= yv;
      t_in[f] = cycle + 1;   // the edge at which the design samples the frame
      burst++;
      if (burst > max_burst) max_burst = burst;
    end
    @(posedge clk);
    vin <= 0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (nout != NFRAMES) begin failures++; $display("%0d frames out of %0d", nout, NFRAMES); end
    checks++;
    if (n_sel_other == 0) begin failures++; $display("no lane other than 0 was ever selected"); end
    checks++;
    if (n_rescued == 0) begin failures++; $display("the ensemble never corrected a Fast-SSC error"); end
    checks++;
    if (n_tie == 0) begin failures++; $display("no path-metric tie occurred"); end
    checks++;
    if (stats[1] == 0 || stats[3] == 0 || stats[4] == 0) begin failures++; $display("a node kind never changed a PM"); end
    checks++;
    if (max_burst < 8) begin failures++; $display("no burst of 8 back-to-back frames"); end
    $display("lane!=0 selected=%0d  ensemble rescues=%0d  ties=%0d  longest burst=%0d  PM updates R0=%0d REP=%0d SPC=%0d",
             n_sel_other, n_rescued, n_tie, max_burst, stats[1], stats[3], stats[4]);
    checks++;   // metric selection must not lose to ML-in-the-list (beyond 1% of frames)
    if (err_aed > err_ml + NFRAMES / 100) begin
      failures++;
      $display("path-metric selection: %0d frame errors, ML-in-the-list: %0d", err_aed, err_ml);
    end
    $display("frame errors over %0d frames (1.5..4.5 dB): Fast-SSC %0d, AED-%0d %0d (ML-in-the-list selection %0d; choices differ in %0d frames)",
             NFRAMES, err_sc, M, err_aed, err_ml, n_ml_differs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
