// lite_pkg: types and constants shared by the LITE scan-instrumentation blocks.
//
// LITE adds a little combinational logic around each scan flip-flop of a
// scan chain so that an ATPG tool can observe hard-to-observe nets and drive
// hard-to-control nets through flip-flops that are already in the chain.
// Four configurations exist; they differ in what the XOR observes and in
// whether a controllability multiplexer sits at the flip-flop output:
//
//   CONFIG1_OBS     XOR of XOR_IN hard-to-observe nets, muxed in front of D.
//   CONFIG2_OBS     XOR of XOR_IN-1 hard-to-observe nets and the original D
//                   logic, muxed in front of D.
//   CONFIG1_OBS_CC  CONFIG1_OBS plus a 2:1 mux at Q (sel_cc) that can put a
//                   hard-to-control net on the cell output.
//   CONFIG2_OBS_CC  CONFIG2_OBS plus the same output mux.
//
// The configuration names, the XOR width range 2..5 and the choice of XOR2
// follow the paper; the 2-bit encoding of the enum is this design's own.
package lite_pkg;

  typedef enum logic [1:0] {
    CONFIG1_OBS    = 2'd0,
    CONFIG2_OBS    = 2'd1,
    CONFIG1_OBS_CC = 2'd2,
    CONFIG2_OBS_CC = 2'd3
  } lite_cfg_e;

  // XOR widths that were evaluated; XOR2 is the one selected for use.
  localparam int unsigned XOR_IN_MIN     = 2;
  localparam int unsigned XOR_IN_MAX     = 5;
  localparam int unsigned XOR_IN_DEFAULT = 2;

  // Config2 feeds the original D logic into one XOR input.
  function automatic bit cfg_xor_takes_org(lite_cfg_e cfg);
    return (cfg == CONFIG2_OBS) || (cfg == CONFIG2_OBS_CC);
  endfunction

  // Configurations with the controllability mux at the flip-flop output.
  function automatic bit cfg_has_cc(lite_cfg_e cfg);
    return (cfg == CONFIG1_OBS_CC) || (cfg == CONFIG2_OBS_CC);
  endfunction

  // Number of hard-to-observe nets a cell takes for a given XOR width.
  function automatic int unsigned cfg_num_obs(lite_cfg_e cfg, int unsigned xor_in);
    return cfg_xor_takes_org(cfg) ? xor_in - 1 : xor_in;
  endfunction

endpackage
