// lite_cell: one LITE-instrumented scan flip-flop.
//
// The cell is a scan flip-flop with observability logic on its input side
// and, in the *_CC configurations, a controllability mux on its output side:
//
//   d_lite = sel ? XOR(observed nets [, func_in]) : func_in   (lite_obs_logic)
//   q      <= se ? si : d_lite                                  (sff)
//   out    = (CC config && sel_cc) ? cc_n : q
//   so     = out
//
// In normal mode (sel = 0, sel_cc = 0) the cell is an ordinary scan
// flip-flop: the functional behaviour and the scan path are unchanged. For
// test, sel = 1 makes the capture cycle store the XOR of the observed nets,
// and sel_cc = 1 puts the hard-to-control net cc_n on the cell output. The
// scan path runs through the output mux, so sel_cc must be 0 while shifting
// (se = 1); the chain top checks that rule.
//
// LITE_EN = 0 builds the cell as a plain scan flip-flop, for flip-flops that
// are left without instrumentation; obs_n, cc_n, sel and sel_cc are then
// unused by design.
//
// Timing: q changes at the rising clock edge; out and so follow q, sel_cc and
// cc_n combinationally. rst clears q asynchronously.
//
// From the paper: the cell boundary and port set (in, n_i/n_j, n_k, si, sel,
// se, clk, rst, sel_cc, out, so), the four configurations, and the output mux
// with Q on input 0 and the hard-to-control net on input 1 whose output is
// both out and so. The paper's two per-configuration drawings show the other
// input order with the mux output driving the controlled net's fan-out; this
// design follows the text and the cell drawing. The option of leaving a cell
// uninstrumented is described; the parameter for it is this design's own.
module lite_cell
  import lite_pkg::*;
#(
  parameter lite_cfg_e   CFG      = CONFIG1_OBS_CC,
  parameter int unsigned XOR_IN   = XOR_IN_DEFAULT,
  parameter bit          USE_XNOR = 1'b0,
  parameter bit          LITE_EN  = 1'b1,
  localparam int unsigned N_OBS   = cfg_num_obs(CFG, XOR_IN)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             se,
  input  logic             sel,
  input  logic             sel_cc,
  input  logic             func_in,
  input  logic [N_OBS-1:0] obs_n,
  input  logic             cc_n,
  input  logic             si,
  output logic             out,
  output logic             so
);

  logic d_lite;
  logic q;

  if (LITE_EN) begin : g_obs
    lite_obs_logic #(
      .CFG      (CFG),
      .XOR_IN   (XOR_IN),
      .USE_XNOR (USE_XNOR)
    ) u_obs (
      .org (func_in),
      .obs (obs_n),
      .sel (sel),
      .d   (d_lite)
    );
  end else begin : g_plain
    assign d_lite = func_in;
  end

  sff u_sff (
    .clk (clk),
    .rst (rst),
    .se  (se),
    .d   (d_lite),
    .si  (si),
    .q   (q)
  );

  if (LITE_EN && cfg_has_cc(CFG)) begin : g_cc
    assign out = sel_cc ? cc_n : q;
  end else begin : g_no_cc
    assign out = q;
  end

  assign so = out;

endmodule
