// cut_model: stand-in for the combinational logic of a circuit under test,
// used only by the scan-chain testbenches.
//
// The LITE chain is wrapped around a real design's logic; the testbenches
// need some logic in that place, so this module builds a fixed, arbitrary
// network from the cell outputs and NPI primary inputs:
//   func_in[i]  = out[i+1] ^ (out[i+2] & pi[i])           next-state logic
//   obs_n[i][k] = (out[i+3+k] & out[i+5+2k]) | (pi[i+k+1] & pi[i+2k+2])
//   cc_n[i]     = pi[i] & pi[i+1] & pi[i+2]                 hard to set to 1
// (indices wrap modulo N and NPI). cc_n depends on primary inputs only, so
// the chain's output muxes cannot form a combinational loop through it.
module cut_model #(
  parameter int unsigned N     = 16,
  parameter int unsigned N_OBS = 2,
  parameter int unsigned NPI   = 8
) (
  input  logic [N-1:0]            out,
  input  logic [NPI-1:0]          pi,
  output logic [N-1:0]            func_in,
  output logic [N-1:0][N_OBS-1:0] obs_n,
  output logic [N-1:0]            cc_n
);

  always_comb begin
    for (int i = 0; i < N; i++) begin
      func_in[i] = out[(i + 1) % N] ^ (out[(i + 2) % N] & pi[i % NPI]);
      cc_n[i]    = pi[i % NPI] & pi[(i + 1) % NPI] & pi[(i + 2) % NPI];
      for (int k = 0; k < N_OBS; k++)
        obs_n[i][k] = (out[(i + 3 + k) % N] & out[(i + 5 + 2 * k) % N])
                    | (pi[(i + k + 1) % NPI] & pi[(i + 2 * k + 2) % NPI]);
    end
  end

endmodule
