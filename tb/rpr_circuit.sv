// rpr_circuit: a small circuit with random-pattern-resistant nets, wrapped
// around an 8-cell LITE chain by tb_lite_random_coverage, with stuck-at fault
// injection.
//
// Internal nets (fault index in brackets):
//   n1 [0] = &pi[3:0]            1 with probability 1/16
//   n2 [1] = &out[3:0]           1 with probability 1/16
//   g  [2] = n1 & n2             1 with probability 1/256
//   n3 [3] = ^pi[7:4]
//   h  [4] = g ^ n3
//   m  [5] = h & out[4] & out[5] & out[6] & pi[4]   h seen only when four bits are 1
// Next-state logic: func_in[0] = m | out[7], the other cells take easy
// functions of their neighbours and the primary inputs; po = out[7] ^ out[0].
// Fault fault_id (0..5) forces that net to fault_val; -1 means fault-free.
// LITE wiring, as a net-selection flow might choose it: cell 0 observes
// (n1, n2), cell 1 (g, pi[6]), cell 2 (h, pi[7]), cell 3 (m, n3), cells 4..7
// (out[k-1], pi[k]); with N_OBS = 1 (Config2) only the first net of each pair
// is used. Hard-to-control nets: cell 2 gets n1, the others an AND3 of
// primary inputs.
module rpr_circuit #(
  parameter int unsigned N_OBS = 2
) (
  input  logic [7:0]            pi,
  input  logic [7:0]            out,
  input  int                    fault_id,
  input  logic                  fault_val,
  output logic [7:0]            func_in,
  output logic [7:0][N_OBS-1:0] obs_n,
  output logic [7:0]            cc_n,
  output logic                  po
);

  logic n1, n2, g, n3, h, m;
  logic [7:0][1:0] pairs;

  function automatic logic inj(logic v, int id);
    return (fault_id == id) ? fault_val : v;
  endfunction

  always_comb begin
    n1 = inj(&pi[3:0], 0);
    n2 = inj(&out[3:0], 1);
    g  = inj(n1 & n2, 2);
    n3 = inj(^pi[7:4], 3);
    h  = inj(g ^ n3, 4);
    m  = inj(h & out[4] & out[5] & out[6] & pi[4], 5);

    func_in[0] = m | out[7];
    func_in[1] = n3 ^ out[0];
    func_in[2] = out[1] & pi[0];
    func_in[3] = out[2] | pi[1];
    func_in[4] = out[3] ^ pi[2];
    func_in[5] = out[4] & out[5];
    func_in[6] = out[6] ^ pi[4];
    func_in[7] = out[6] & pi[5];
    po         = out[7] ^ out[0];

    pairs[0] = {n2, n1};
    pairs[1] = {pi[6], g};
    pairs[2] = {pi[7], h};
    pairs[3] = {n3, m};
    for (int k = 4; k < 8; k++) pairs[k] = {pi[k], out[k-1]};
    for (int k = 0; k < 8; k++)
      for (int j = 0; j < int'(N_OBS); j++) obs_n[k][j] = pairs[k][j];

    for (int k = 0; k < 8; k++) cc_n[k] = pi[k] & pi[(k + 1) % 8] & pi[(k + 2) % 8];
    cc_n[2] = n1;
  end

endmodule
