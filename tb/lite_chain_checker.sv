// lite_chain_checker: reference model and scoreboard for a LITE scan chain,
// used by the chain testbenches.
//
// It holds a cut_model that drives the chain under test from the chain's own
// outputs, and a second cut_model plus a cycle-level model of the chain
// (state m_q) written from the definition of the cells:
//   out[i] = (instrumented CC cell && sel_cc) ? cc_n[i] : q[i]
//   shift:   q[i] <= out[i-1]   (q[0] <= si)
//   capture: q[i] <= (instrumented && sel) ? XOR : func_in[i]
// Two nanoseconds after each falling clock edge (after the stimulus has
// settled) it compares all cell outputs and so with the model. On each rising
// edge it counts the mechanisms that occurred: shift, plain capture,
// capture in which the XOR changed a captured bit, controllability override
// that changed a cell output, and capture through an uninstrumented cell.
module lite_chain_checker
  import lite_pkg::*;
#(
  parameter int unsigned  N        = 16,
  parameter lite_cfg_e    CFG      = CONFIG1_OBS_CC,
  parameter int unsigned  XOR_IN   = 2,
  parameter bit           USE_XNOR = 1'b0,
  parameter logic [N-1:0] LITE_EN  = '1,
  parameter int unsigned  NPI      = 8,
  localparam int unsigned N_OBS    = cfg_num_obs(CFG, XOR_IN)
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    se,
  input  logic                    sel,
  input  logic                    sel_cc,
  input  logic                    si,
  input  logic [NPI-1:0]          pi,
  input  logic [N-1:0]            dut_out,
  input  logic                    dut_so,
  output logic [N-1:0]            func_in,
  output logic [N-1:0][N_OBS-1:0] obs_n,
  output logic [N-1:0]            cc_n,
  output int                      checks,
  output int                      failures,
  output int                      n_shift,
  output int                      n_cap_func,
  output int                      n_cap_obs,
  output int                      n_cc,
  output int                      n_plain
);

  localparam bit CFG2 = (CFG == CONFIG2_OBS) || (CFG == CONFIG2_OBS_CC);
  localparam bit CC   = (CFG == CONFIG1_OBS_CC) || (CFG == CONFIG2_OBS_CC);

  // logic around the chain under test
  cut_model #(.N(N), .N_OBS(N_OBS), .NPI(NPI)) u_cut_dut (
    .out (dut_out), .pi (pi), .func_in (func_in), .obs_n (obs_n), .cc_n (cc_n)
  );

  // reference chain
  logic [N-1:0]            m_q, m_out, m_fin, m_cc, m_x;
  logic [N-1:0][N_OBS-1:0] m_obs;

  cut_model #(.N(N), .N_OBS(N_OBS), .NPI(NPI)) u_cut_ref (
    .out (m_out), .pi (pi), .func_in (m_fin), .obs_n (m_obs), .cc_n (m_cc)
  );

  always_comb begin
    for (int i = 0; i < N; i++) begin
      m_out[i] = (CC && LITE_EN[i] && sel_cc) ? m_cc[i] : m_q[i];
      m_x[i]   = 1'b0;
      for (int k = 0; k < N_OBS; k++) m_x[i] ^= m_obs[i][k];
      if (CFG2)     m_x[i] ^= m_fin[i];
      if (USE_XNOR) m_x[i] = ~m_x[i];
    end
  end

  initial begin
    checks = 0; failures = 0;
    n_shift = 0; n_cap_func = 0; n_cap_obs = 0; n_cc = 0; n_plain = 0;
  end

  always @(posedge clk or posedge rst) begin
    if (rst) begin
      m_q <= '0;
    end else begin
      if (se) begin
        n_shift++;
        m_q <= {m_out[N-2:0], si};
      end else begin
        if (!sel) n_cap_func++;
        if (sel && ((m_x ^ m_fin) & LITE_EN) != '0) n_cap_obs++;
        if (sel && LITE_EN != '1) n_plain++;
        for (int i = 0; i < N; i++) m_q[i] <= (LITE_EN[i] && sel) ? m_x[i] : m_fin[i];
      end
      if (CC && sel_cc && ((m_cc ^ m_q) & LITE_EN) != '0) n_cc++;
    end
  end

  always @(negedge clk) begin
    #2;
    checks++;
    if (dut_out !== m_out || dut_so !== m_out[N-1]) begin
      failures++;
      if (failures < 10)
        $display("FAIL %m: chain outputs differ from the model at %0t (so %0b, expected %0b)",
                 $time, dut_so, m_out[N-1]);
    end
  end

endmodule
