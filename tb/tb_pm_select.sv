// tb_pm_select -- testbench of the minimum-path-metric selection unit (M = 4).
// Random candidate sets, with metrics drawn from a small range so that ties are
// frequent, enter every cycle with random gaps in valid_i.  One cycle later the
// code word, metric and lane index must be those of the first candidate with the
// lowest metric, and valid_o must follow valid_i.
module tb_pm_select;
  import aed_pkg::*;

  localparam int M = 4;
  localparam int NCYC = 4000;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;

  logic         vin = 0, vout;
  logic [N-1:0] cx  [M];
  pm_t          cpm [M];
  logic [N-1:0] xo;
  pm_t          pmo;
  logic [3:0]   sel;

  pm_select #(.M(M)) dut (.clk, .rst_n, .valid_i(vin), .cand_x_i(cx), .cand_pm_i(cpm),
                          .valid_o(vout), .x_o(xo), .pm_o(pmo), .sel_o(sel));

  int checks = 0, failures = 0, ties = 0, nonzero = 0;

  initial begin : watchdog
    repeat (NCYC + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int c = 0; c < NCYC; c++) begin
      logic [N-1:0] nx [M];
      pm_t np [M];
      bit nv;
      int best;
      nv = $urandom_range(4) != 0;
      for (int m = 0; m < M; m++) begin
        nx[m] = {$urandom, $urandom, $urandom, $urandom};
        np[m] = (c % 5 == 0) ? pm_t'($urandom) : pm_t'($urandom_range(6));
      end
      best = 0;
      for (int m = 1; m < M; m++) if (np[m] < np[best]) best = m;
      for (int m = 0; m < M; m++) if (m != best && np[m] == np[best]) begin ties++; break; end
      @(negedge clk);
      vin = nv;
      cx  = nx;
      cpm = np;
      @(posedge clk);
      #1;
      checks++;
      if (vout != nv || (nv && (xo != nx[best] || pmo != np[best] || int'(sel) != best))) begin
        failures++;
        if (failures < 10) $display("cycle %0d: v=%0b/%0b pm=%0d/%0d sel=%0d/%0d", c, vout, nv, pmo, np[best], sel, best);
      end
      if (nv && best != 0) nonzero++;
    end
    checks++;
    if (ties < 100 || nonzero < 100) failures++;
    $display("ties=%0d selections of lanes other than 0=%0d", ties, nonzero);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
