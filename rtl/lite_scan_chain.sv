// lite_scan_chain: a scan chain built from LITE cells, the top of the design.
//
// N_FF cells are chained so that cell 0 takes the chip's scan input si and
// every further cell takes the scan output of the one before; the last cell's
// scan output is the chip's so. All cells share clk, rst, se (scan enable) and
// the two LITE selects, sel (observability) and sel_cc (controllability),
// which are extra primary inputs of the chip.
//
// The combinational logic of the circuit under test stays outside this
// module. Per cell i it supplies func_in[i] (the logic that used to drive the
// flip-flop's D), obs_n[i] (the hard-to-observe nets wired to the cell's XOR)
// and cc_n[i] (the hard-to-control net wired to the output mux), and it takes
// back out[i] in place of the flip-flop's Q.
//
// Test protocol: with se = 1 and sel_cc = 0 the chain shifts one bit per
// clock, so a pattern of N_FF bits loads in N_FF clocks while the previous
// response unloads at so. A capture clock (se = 0) stores func_in (sel = 0)
// or the XOR of the observed nets (sel = 1); sel_cc = 1 during capture drives
// the hard-to-control nets onto the cell outputs. With sel = sel_cc = 0 the
// chain behaves exactly like an uninstrumented scan chain.
//
// From the paper: the chain structure, the shared selects, the four
// configurations and XOR2. The default length N_FF = 6062 is the largest
// flip-flop count among the evaluated benchmarks (b19), so every evaluated
// benchmark's flip-flops fit in one chain; the default configuration is
// CONFIG1_OBS_CC, the one with the largest average pattern reduction. LITE_EN
// marks, per cell, whether it is instrumented; the paper leaves some
// flip-flops without LITE when too few suitable nets exist. The assertion on
// se and sel_cc is this design's reading of "the scan path is not changed".
// Lint notes that rst is used both as the flip-flops' asynchronous reset and
// as the assertion's disable condition; that is intended and has no effect
// on the circuit.
module lite_scan_chain
  import lite_pkg::*;
#(
  parameter int unsigned     N_FF     = 6062,
  parameter lite_cfg_e       CFG      = CONFIG1_OBS_CC,
  parameter int unsigned     XOR_IN   = XOR_IN_DEFAULT,
  parameter bit              USE_XNOR = 1'b0,
  parameter logic [N_FF-1:0] LITE_EN  = '1,
  localparam int unsigned    N_OBS    = cfg_num_obs(CFG, XOR_IN)
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       se,
  input  logic                       sel,
  input  logic                       sel_cc,
  input  logic                       si,
  input  logic [N_FF-1:0]            func_in,
  input  logic [N_FF-1:0][N_OBS-1:0] obs_n,
  input  logic [N_FF-1:0]            cc_n,
  output logic [N_FF-1:0]            out,
  output logic                       so
);

  logic [N_FF:0] scan;   // scan[i] is the scan input of cell i

  assign scan[0] = si;

  for (genvar i = 0; i < N_FF; i++) begin : g_cell
    lite_cell #(
      .CFG      (CFG),
      .XOR_IN   (XOR_IN),
      .USE_XNOR (USE_XNOR),
      .LITE_EN  (LITE_EN[i])
    ) u_cell (
      .clk     (clk),
      .rst     (rst),
      .se      (se),
      .sel     (sel),
      .sel_cc  (sel_cc),
      .func_in (func_in[i]),
      .obs_n   (obs_n[i]),
      .cc_n    (cc_n[i]),
      .si      (scan[i]),
      .out     (out[i]),
      .so      (scan[i+1])
    );
  end

  assign so = scan[N_FF];

  // Shifting through the output muxes needs them on the Q side.
  a_no_cc_while_shifting : assert property (@(posedge clk) disable iff (rst) se |-> !sel_cc)
    else $error("lite_scan_chain: sel_cc must be 0 while se shifts the chain");

endmodule
