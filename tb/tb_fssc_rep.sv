// tb_fssc_rep -- self-checking testbench of fssc_rep.
// Applies random LLR vectors (full range, and a small-magnitude range that makes
// ties and corrections frequent) together with random incoming path metrics,
// including ones near saturation, and compares beta and the path metric with a
// reference computed here from the node's defining equations.
module tb_fssc_rep;
  import aed_pkg::*;
  localparam int unsigned NS = 8;

  llr_t [NS-1:0] alpha;
  pm_t           pm_in, pm_out;
  logic [NS-1:0] beta;
  int checks = 0, failures = 0, hits = 0;

  fssc_rep #(.NS(NS)) dut (.alpha_i(alpha), .pm_i(pm_in), .beta_o(beta), .pm_o(pm_out));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a [NS];
    logic [NS-1:0] exp_b;
    int exp_inc, exp_pm;
    for (int t = 0; t < 4000; t++) begin
      for (int j = 0; j < NS; j++) begin
        a[j] = (t % 2 != 0) ? int'($urandom_range(62)) - 31 : int'($urandom_range(8)) - 4;
        alpha[j] = llr_t'(a[j]);
      end
      pm_in = (t % 7 == 0) ? pm_t'((1 << PM_W) - 1 - $urandom_range(40)) : pm_t'($urandom_range(1000));
      #1;
      begin
        automatic int s = 0;
        bit bb;
        for (int j = 0; j < NS; j++) s += a[j];
        bb = (s < 0);
        exp_b = bb ? '1 : '0;
        exp_inc = 0;
        for (int j = 0; j < NS; j++)
          if ((a[j] < 0) != bb) exp_inc += (a[j] < 0 ? -a[j] : a[j]);
        if (exp_inc != 0) hits++;
      end
      exp_pm = int'(pm_in) + exp_inc;
      if (exp_pm > (1 << PM_W) - 1) exp_pm = (1 << PM_W) - 1;
      checks++;
      if (beta !== exp_b || int'(pm_out) != exp_pm) begin
        failures++;
        if (failures < 10) $display("mismatch t=%0d beta=%b exp=%b pm=%0d exp=%0d", t, beta, exp_b, pm_out, exp_pm);
      end
      #1;
    end
    // the correcting / penalising case must have been exercised
    checks++;
    if (hits < 100) failures++;
    $display("node corrections seen: %0d", hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
