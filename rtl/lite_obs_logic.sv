// lite_obs_logic: the observability logic LITE puts in front of the D input
// of a scan flip-flop.
//
// An XOR gate compresses hard-to-observe nets into one bit, and a 2:1 mux
// passes either the original logic that used to drive D (sel = 0) or the XOR
// output (sel = 1). When the flip-flop captures the XOR, a fault effect on any
// one of the observed nets flips the captured bit and is shifted out.
//
//   Config1 (CFG = CONFIG1_OBS / CONFIG1_OBS_CC): x = ^obs, XOR_IN nets.
//   Config2 (CFG = CONFIG2_OBS / CONFIG2_OBS_CC): x = org ^ (^obs), the
//            original logic takes one XOR input and XOR_IN-1 nets the rest.
//   d = sel ? x : org
//
// Interface: org is the original D logic, obs the N_OBS observed nets, sel
// the common LITE select (a primary input of the chip), d goes to the scan
// flip-flop's functional input. Purely combinational, no clock.
//
// From the paper: the XOR-then-mux structure, both configurations, the mux
// input order (original on 0, XOR on 1), XOR widths 2 to 5 with XOR2 chosen,
// and XNOR as an equally usable alternative (USE_XNOR). The parameter names
// are this design's own.
module lite_obs_logic
  import lite_pkg::*;
#(
  parameter lite_cfg_e   CFG      = CONFIG1_OBS_CC,
  parameter int unsigned XOR_IN   = XOR_IN_DEFAULT,
  parameter bit          USE_XNOR = 1'b0,
  localparam int unsigned N_OBS   = cfg_num_obs(CFG, XOR_IN)
) (
  input  logic             org,
  input  logic [N_OBS-1:0] obs,
  input  logic             sel,
  output logic             d
);

  logic x;

  always_comb begin
    x = ^obs;
    if (cfg_xor_takes_org(CFG)) x = x ^ org;
    if (USE_XNOR)               x = ~x;
    d = sel ? x : org;
  end

  initial begin
    assert (XOR_IN >= XOR_IN_MIN && XOR_IN <= XOR_IN_MAX)
      else $error("lite_obs_logic: XOR_IN=%0d outside %0d..%0d", XOR_IN, XOR_IN_MIN, XOR_IN_MAX);
  end

endmodule
