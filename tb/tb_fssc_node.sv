// tb_fssc_node -- testbench of the recursive Fast-SSC node on a 16-bit test tree.
//
// The frozen pattern 16'h071F gives the pruned tree
//   [0,8)  split: Rate-0 [0,4) + SPC [4,8)
//   [8,16) split: REP [8,12) + Rate-1 [12,16)
// so every node kind and the split path are used.  Three instances are checked:
//   REG_SIZE = 4  -> latency 3 (SPC 1 cycle, REP 1 cycle, Rate-1 1 cycle; Rate-0 free)
//   REG_SIZE = 16 -> latency 1 (whole tree in one stage)
//   COMB = 1      -> latency 0 (no registers)
// A new random LLR vector enters every cycle; beta and PM are compared with the
// iterative reference decoder of fssc_ref_pkg after the hand-derived latency.
module tb_fssc_node;
  import aed_pkg::*;
  import fssc_ref_pkg::*;

  localparam int unsigned NS = 16;
  localparam logic [NS-1:0] FR = 16'h071F;
  localparam int NCYC = 3000;
  localparam int LAT [3] = '{3, 1, 0};

  logic clk = 0;
  always #5 clk = ~clk;

  llr_t [NS-1:0] alpha;
  pm_t           pm_in;
  logic [NS-1:0] beta [3];
  pm_t           pm_out [3];

  fssc_node #(.NS(NS), .FROZEN(FR), .COMB(1'b0), .REG_SIZE(4)) dut0 (
    .clk, .alpha_i(alpha), .pm_i(pm_in), .beta_o(beta[0]), .pm_o(pm_out[0]));
  fssc_node #(.NS(NS), .FROZEN(FR), .COMB(1'b0), .REG_SIZE(16)) dut1 (
    .clk, .alpha_i(alpha), .pm_i(pm_in), .beta_o(beta[1]), .pm_o(pm_out[1]));
  fssc_node #(.NS(NS), .FROZEN(FR), .COMB(1'b1), .REG_SIZE(4)) dut2 (
    .clk, .alpha_i(alpha), .pm_i(pm_in), .beta_o(beta[2]), .pm_o(pm_out[2]));

  int checks = 0, failures = 0;
  logic [NS-1:0] exp_beta [NCYC];
  int            exp_pm   [NCYC];
  int            stats [5] = '{default: 0};

  initial begin : watchdog
    repeat (NCYC + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit_vec_t fr, xb;
    llr_vec_t l;
    int pm;
    foreach (fr[i]) fr[i] = (i < NS) ? FR[i] : 1'b1;
    for (int c = 0; c < NCYC; c++) begin
      // drive cycle c's input just after the clock edge
      l = '{default: 0};
      for (int i = 0; i < NS; i++) begin
        l[i] = (c % 3 == 0) ? int'($urandom_range(62)) - 31 : int'($urandom_range(10)) - 3;
        alpha[i] = llr_t'(l[i]);
      end
      pm_in = pm_t'($urandom_range(500));
      ref_decode(4, fr, l, xb, pm, stats);
      for (int i = 0; i < NS; i++) exp_beta[c][i] = xb[i];
      exp_pm[c] = int'(pm_in) + pm;
      #1;
      for (int d = 0; d < 3; d++)
        if (c >= LAT[d]) begin
          checks++;
          if (beta[d] !== exp_beta[c - LAT[d]] || int'(pm_out[d]) != exp_pm[c - LAT[d]]) begin
            failures++;
            if (failures < 10)
              $display("dut%0d cycle %0d: beta=%h exp=%h pm=%0d exp=%0d", d, c, beta[d],
                       exp_beta[c - LAT[d]], pm_out[d], exp_pm[c - LAT[d]]);
          end
        end
      @(posedge clk);
      #1;
    end
    // every node kind that touches the metric must have changed it at least once
    for (int k = 1; k < 5; k++) if (k != 2) begin
      checks++;
      if (stats[k] == 0) begin failures++; $display("node kind %0d never changed the PM", k); end
    end
    $display("PM updates by kind: R0=%0d REP=%0d SPC=%0d", stats[1], stats[3], stats[4]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
