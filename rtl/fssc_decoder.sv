// fssc_decoder -- one constituent decoder ("Dec") of the automorphism ensemble:
// a fully unrolled and pipelined Fast-SSC decoder for the polar code described by
// FROZEN (default: P(128,60) from aed_pkg), which also returns the path metric of
// its code word estimate.
//
// The root fssc_node is fed with the channel LLRs and PM = 0.  Its beta output is
// the code word estimate x (not the information bits).  The decoder accepts one
// frame per clock cycle; results appear LAT cycles later (LAT = 10 for P(128,60)
// with REG_SIZE = 8).  valid_i is carried along a LAT-stage shift register, the only
// state that is reset (active-low synchronous rst_n); data registers are not reset.
module fssc_decoder
  import aed_pkg::*;
#(
  parameter int unsigned   NS       = N,
  parameter logic [NS-1:0] FROZEN   = NS'(FROZEN_MASK),
  parameter int unsigned   REG_SIZE = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          valid_i,
  input  llr_t [NS-1:0] llr_i,
  output logic          valid_o,
  output logic [NS-1:0] x_o,
  output pm_t           pm_o
);
  localparam int unsigned LAT = node_lat(NS, N'(FROZEN), REG_SIZE);

  fssc_node #(.NS(NS), .FROZEN(FROZEN), .COMB(1'b0), .REG_SIZE(REG_SIZE)) u_root (
    .clk, .alpha_i(llr_i), .pm_i('0), .beta_o(x_o), .pm_o);

  if (LAT == 0) begin : g_nolat
    assign valid_o = valid_i;
  end else begin : g_vpipe
    logic [LAT-1:0] vsr;
    always_ff @(posedge clk)
      if (!rst_n) vsr <= '0;
      else        vsr <= LAT'({vsr, valid_i});
    assign valid_o = vsr[LAT-1];
  end
endmodule
