// tb_aed_lane -- testbench of one ensemble lane (pi_m, decoder, pi_m^-1) with
// automorphism entry 3.  Noisy random code words enter with random idle cycles;
// the unpermuted code word and path metric are compared with the reference
// (permute, iterative Fast-SSC, unpermute), and the latency must be 10 cycles.
// The test also counts frames on which this lane's result differs from the
// unpermuted decoder's, which shows that the permutation is really applied.
module tb_aed_lane;
  import aed_pkg::*;
  import fssc_ref_pkg::*;

  localparam int NFRAMES = 3000;
  localparam int LAT = 10;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;

  logic         vin = 0, vout;
  llr_t [N-1:0] y;
  logic [N-1:0] xo;
  pm_t          pmo;

  aed_lane #(.M_IDX(3)) dut (.clk, .rst_n, .valid_i(vin), .y_i(y), .valid_o(vout), .x_o(xo), .pm_o(pmo));

  int checks = 0, failures = 0, cycle = 0, nout = 0, differs = 0, wrong = 0;
  logic [N-1:0] exp_x [$];
  int       exp_pm [$];
  int       t_in   [$];
  int       stats [5] = '{default: 0};

  always @(posedge clk) cycle <= cycle + 1;

  initial begin : watchdog
    repeat (NFRAMES * 3 + 200) @(posedge clk);
    failures++;
    $display("watchdog: %0d of %0d frames seen", nout, NFRAMES);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output monitor
  always @(posedge clk) if (rst_n && vout) begin
    automatic logic [N-1:0] ex = exp_x.pop_front();
    automatic int ep = exp_pm.pop_front();
    automatic int ti = t_in.pop_front();
    automatic bit ok = (xo == ex);
    checks += 2;
    if (!ok || int'(pmo) != ep) begin
      failures++;
      if (failures < 10) $display("frame %0d: x mismatch=%0b pm=%0d exp=%0d", nout, !ok, pmo, ep);
    end
    if (cycle - ti != LAT) begin
      failures++;
      if (failures < 10) $display("frame %0d: latency %0d, expected %0d", nout, cycle - ti, LAT);
    end
    nout++;
  end

  initial begin
    bit_vec_t fr;
    bit_vec_t u, x, xb, x0;
    llr_vec_t l;
    int pm, pm0;
    int dummy [5];
    llr_t [N-1:0] yv;
    logic [N-1:0] xv;
    fr = ref_frozen();
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < NFRAMES; f++) begin
      while ($urandom_range(3) == 0) begin
        @(posedge clk);
        vin <= 0;
      end
      for (int i = 0; i < N; i++) u[i] = fr[i] ? 1'b0 : 1'($urandom);
      x = polar_encode(7, u);
      l = channel(x, 1.5 + 3.5 * real'(f % 8) / 7.0, 60.0 / 128.0, 1.0);
      ref_lane(3, fr, l, xb, pm, stats);
      ref_decode(7, fr, l, x0, pm0, dummy);
      if (x0 != xb) differs++;
      if (xb != x) wrong++;
      @(posedge clk);
      vin <= 1;
      for (int i = 0; i < N; i++) yv[i] = llr_t'(l[i]);
      y <= yv;
      for (int i = 0; i < N; i++) xv[i] = xb[i];
      exp_x.push_back(xv);
      exp_pm.push_back(pm);
      t_in.push_back(cycle + 1);   // the edge at which the DUT samples the frame
    end
    @(posedge clk);
    vin <= 0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (nout != NFRAMES) begin failures++; $display("%0d frames out of %0d", nout, NFRAMES); end
    checks++;
    if (stats[1] == 0 || stats[3] == 0 || stats[4] == 0) begin
      failures++;
      $display("a node kind never changed the PM");
    end
    checks++;
    if (differs == 0) begin failures++; $display("the permutation never changed a result"); end
    $display("frames=%0d wrong code words=%0d  differ from unpermuted=%0d  PM updates R0=%0d REP=%0d SPC=%0d",
             NFRAMES, wrong, differs, stats[1], stats[3], stats[4]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
