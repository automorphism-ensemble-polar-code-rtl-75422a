// tb_aed_workloads -- the smallest and largest of the evaluated ensemble sizes,
// AED-2 and AED-16, run side by side on the same noisy frames at full throughput.
// (AED-4 is the default and has its own testbench; AED-8 differs only in M and is
// left out to keep the build time of this testbench moderate.)
//
// The reference decodes each frame on all 16 automorphisms once; instance k's
// expectation is the lowest-metric lane among its first M_k lanes.  Every output
// is checked bit-exactly together with its metric, lane index and the 11-cycle
// latency, which must not depend on M.  AED-16 must not make more frame errors
// than AED-2 on the same frames, and must select lanes above 7 at least once.  Frame error counts are printed.
module tb_aed_workloads;
  import aed_pkg::*;
  import fssc_ref_pkg::*;

  localparam int NW = 2;
  localparam int MS [NW] = '{2, 16};
  localparam int NFRAMES = 600;
  localparam int LAT = 11;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;
  logic         vin = 0;
  llr_t [N-1:0] y;

  int checks = 0, failures = 0, cycle = 0;
  logic [N-1:0] exp_x   [NW][NFRAMES];
  int           exp_pm  [NW][NFRAMES];
  int           exp_sel [NW][NFRAMES];
  int           t_in    [NFRAMES];
  int           nout    [NW] = '{default: 0};
  int           errs    [NW] = '{default: 0};
  int           high_sel = 0;

  always @(posedge clk) cycle <= cycle + 1;

  for (genvar k = 0; k < NW; k++) begin : g_w
    logic         vout;
    logic [N-1:0] xo;
    pm_t          pmo;
    logic [3:0]   selo;
    aed_decoder #(.M(MS[k])) dut (.clk, .rst_n, .valid_i(vin), .y_i(y),
                                  .valid_o(vout), .x_o(xo), .pm_o(pmo), .sel_o(selo));
    always @(posedge clk) if (rst_n && vout) begin
      automatic int f = nout[k];
      checks++;
      if (xo != exp_x[k][f] || int'(pmo) != exp_pm[k][f] || int'(selo) != exp_sel[k][f]
          || cycle - t_in[f] != LAT) begin
        failures++;
        if (failures < 10) $display("AED-%0d frame %0d: x ok=%0b pm=%0d/%0d sel=%0d/%0d lat=%0d",
                                    MS[k], f, xo == exp_x[k][f], pmo, exp_pm[k][f], selo,
                                    exp_sel[k][f], cycle - t_in[f]);
      end
      nout[k] = f + 1;
    end
  end

  initial begin : watchdog
    repeat (NFRAMES * 3 + 200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit_vec_t fr, u, x, xb;
    llr_vec_t l;
    logic [N-1:0] xl [M_MAX];
    int pl [M_MAX];
    logic [N-1:0] xtx;
    llr_t [N-1:0] yv;
    int st [5];
    fr = ref_frozen();
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < NFRAMES; f++) begin
      for (int i = 0; i < N; i++) u[i] = fr[i] ? 1'b0 : 1'($urandom);
      x = polar_encode(7, u);
      for (int i = 0; i < N; i++) xtx[i] = x[i];
      l = channel(x, 2.0 + 1.0 * real'(f % 3), 60.0 / 128.0, 1.0);
      for (int m = 0; m < M_MAX; m++) begin
        ref_lane(m, fr, l, xb, pl[m], st);
        for (int i = 0; i < N; i++) xl[m][i] = xb[i];
      end
      for (int k = 0; k < NW; k++) begin
        automatic int best = 0;
        for (int m = 1; m < MS[k]; m++) if (pl[m] < pl[best]) best = m;
        exp_x[k][f] = xl[best];
        exp_pm[k][f] = pl[best];
        exp_sel[k][f] = best;
        if (xl[best] != xtx) errs[k]++;
        if (k == NW - 1 && best > 7) high_sel++;
      end
      for (int i = 0; i < N; i++) yv[i] = llr_t'(l[i]);
      @(posedge clk);
      vin <= 1;
      y   <= yv;
      t_in[f] = cycle + 1;
    end
    @(posedge clk);
    vin <= 0;
    repeat (LAT + 3) @(posedge clk);
    for (int k = 0; k < NW; k++) begin
      checks++;
      if (nout[k] != NFRAMES) begin failures++; $display("AED-%0d: %0d frames out", MS[k], nout[k]); end
      $display("AED-%0d: %0d frame errors in %0d frames (2, 3, 4 dB)", MS[k], errs[k], NFRAMES);
    end
    checks++;
    if (errs[1] > errs[0]) begin failures++; $display("AED-16 did worse than AED-2"); end
    checks++;
    if (high_sel == 0) begin failures++; $display("AED-16 never selected a lane above 7"); end
    $display("AED-16 selections of lanes 8..15: %0d", high_sel);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
