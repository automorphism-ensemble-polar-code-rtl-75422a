// fssc_node -- one node of a fully unrolled, pipelined Fast-SSC polar decoder,
// with the path metric (PM) used by the ensemble's candidate selection.
//
// The module instantiates itself recursively and so builds the whole pruned
// polar factor tree below it at elaboration time.  FROZEN[j] = 1 marks bit j of the
// node as frozen; from it the node's kind is decided (aed_pkg::classify):
//   Rate-0  -> fssc_rate0 (all-zero result, PM from the negative LLRs)
//   Rate-1  -> hard decision on every LLR, PM unchanged
//   REP     -> fssc_rep,  SPC -> fssc_spc
//   other   -> split: alpha_l = f(a,b) feeds the left child, alpha_r = g(a,b,beta_l)
//              the right child, and beta = {beta_r, beta_l ^ beta_r}, where a and b
//              are the lower and upper halves of the input LLRs.
// The PM flows through the leaves in decoding order: pm_i enters the left child,
// whose pm_o enters the right child, whose pm_o leaves the node.
//
// Pipelining (this design's choice): a subtree whose size is <= REG_SIZE, and any
// special node, is evaluated combinationally (COMB = 1 below it) and its beta and
// PM are registered, costing one cycle; Rate-0 subtrees cost none because their
// result is known in advance.  Above REG_SIZE a split node costs the sum of its
// children; its input halves are delayed by the left child's latency so the g
// function sees them together with beta_l, and beta_l is delayed by the right
// child's latency for the final combination.  The node therefore accepts a new
// LLR vector every clock and produces beta_o / pm_o LAT = aed_pkg::node_lat()
// cycles after alpha_i / pm_i.  With REG_SIZE = 8 the root of P(128,60) has LAT = 10.
module fssc_node
  import aed_pkg::*;
#(
  parameter int unsigned    NS       = 8,
  parameter logic [NS-1:0]  FROZEN   = NS'(1),   // default: an SPC node
  parameter bit             COMB     = 1'b0,     // 1: no registers inside (parent registers)
  parameter int unsigned    REG_SIZE = 8
) (
  input  logic          clk,
  input  llr_t [NS-1:0] alpha_i,
  input  pm_t           pm_i,
  output logic [NS-1:0] beta_o,
  output pm_t           pm_o
);
  localparam logic [N-1:0] MASK_X = N'(FROZEN);
  localparam node_kind_e   KIND   = classify(NS, MASK_X);
  localparam int unsigned  H      = NS / 2;

  // STAGE: this node closes one pipeline stage (its subtree is built without
  // registers and its outputs are registered here).  CC: no registers below.
  localparam bit           STAGE  = !COMB && KIND != NK_R0 && (NS <= REG_SIZE || KIND != NK_SPLIT);
  localparam bit           CC     = COMB || STAGE;

  logic [NS-1:0] beta_c;   // result of this node's own logic, before the stage register
  pm_t           pm_c;

  if (KIND == NK_R0) begin : g_r0
    fssc_rate0 #(.NS(NS)) u_r0 (.alpha_i, .pm_i, .beta_o(beta_c), .pm_o(pm_c));

  end else if (KIND == NK_R1) begin : g_r1
    for (genvar j = 0; j < NS; j++) begin : g_hd
      assign beta_c[j] = alpha_i[j][LLR_W-1];
    end
    assign pm_c = pm_i;

  end else if (KIND == NK_REP) begin : g_rep
    fssc_rep #(.NS(NS)) u_rep (.alpha_i, .pm_i, .beta_o(beta_c), .pm_o(pm_c));

  end else if (KIND == NK_SPC) begin : g_spc
    fssc_spc #(.NS(NS)) u_spc (.alpha_i, .pm_i, .beta_o(beta_c), .pm_o(pm_c));

  end else begin : g_split
    localparam logic [H-1:0] FR_L  = FROZEN[H-1:0];
    localparam logic [H-1:0] FR_R  = FROZEN[NS-1:H];
    localparam int unsigned  LAT_L = CC ? 0 : node_lat(H, N'(FR_L), REG_SIZE);
    localparam int unsigned  LAT_R = CC ? 0 : node_lat(H, N'(FR_R), REG_SIZE);

    llr_t [H-1:0] alpha_l, alpha_r, a_d, b_d;
    logic [H-1:0] beta_l, beta_r, beta_l_d;
    pm_t          pm_l;

    always_comb
      for (int unsigned i = 0; i < H; i++) alpha_l[i] = f_minsum(alpha_i[i], alpha_i[i+H]);

    fssc_node #(.NS(H), .FROZEN(FR_L), .COMB(CC), .REG_SIZE(REG_SIZE)) u_left (
      .clk, .alpha_i(alpha_l), .pm_i, .beta_o(beta_l), .pm_o(pm_l));

    pipe_delay #(.W(2*H*LLR_W), .D(LAT_L)) u_dly_alpha (
      .clk, .d_i({alpha_i[NS-1:H], alpha_i[H-1:0]}), .q_o({b_d, a_d}));

    always_comb
      for (int unsigned i = 0; i < H; i++) alpha_r[i] = g_func(a_d[i], b_d[i], beta_l[i]);

    fssc_node #(.NS(H), .FROZEN(FR_R), .COMB(CC), .REG_SIZE(REG_SIZE)) u_right (
      .clk, .alpha_i(alpha_r), .pm_i(pm_l), .beta_o(beta_r), .pm_o(pm_c));

    pipe_delay #(.W(H), .D(LAT_R)) u_dly_beta (.clk, .d_i(beta_l), .q_o(beta_l_d));

    assign beta_c = {beta_r, beta_l_d ^ beta_r};
  end

  if (STAGE) begin : g_stage
    always_ff @(posedge clk) begin
      beta_o <= beta_c;
      pm_o   <= pm_c;
    end
  end else begin : g_pass
    assign beta_o = beta_c;
    assign pm_o   = pm_c;
  end
endmodule
