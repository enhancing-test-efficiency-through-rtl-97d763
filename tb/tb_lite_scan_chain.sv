// tb_lite_scan_chain: end-to-end testbench of the LITE scan chain.
//
// Four 16-cell chains, one per configuration, run the same scan test:
//   A  CONFIG1_OBS,    XOR2, all cells instrumented
//   B  CONFIG2_OBS,    XOR3, cell 7 left uninstrumented
//   C  CONFIG1_OBS_CC, XNOR2, cells 0 and 15 left uninstrumented
//   D  CONFIG2_OBS_CC, XOR2, all cells instrumented
// Each chain is wrapped in a stand-in circuit (cut_model) and checked every
// cycle by lite_chain_checker. The test: reset; a shift-latency check (a
// single 1 shifted into a cleared chain must reach so after exactly N clocks);
// then 120 scan patterns, each a full N-bit load (which unloads the previous
// response) followed by one or two capture clocks with sel and sel_cc in all
// four combinations and random primary inputs; a reset in the middle; a final
// unload. It fails if any chain never showed a shift, a plain capture, an XOR
// capture that changed a bit, a controllability override (C, D) or a capture
// through an uninstrumented cell (B, C).
module tb_lite_scan_chain;
  import lite_pkg::*;

  localparam int unsigned N   = 16;
  localparam int unsigned NPI = 8;
  localparam int          NI  = 4;
  localparam lite_cfg_e        CFGS [NI] = '{CONFIG1_OBS, CONFIG2_OBS, CONFIG1_OBS_CC, CONFIG2_OBS_CC};
  localparam int unsigned      XW   [NI] = '{2, 3, 2, 2};
  localparam bit               XN   [NI] = '{0, 0, 1, 0};
  localparam logic [N-1:0]     EN   [NI] = '{16'hFFFF, 16'hFF7F, 16'h7FFE, 16'hFFFF};

  logic           clk = 1'b0;
  logic           rst, se, sel, sel_cc, si;
  logic [NPI-1:0] pi;
  logic           so [NI];
  int             c_checks [NI], c_fail [NI];
  int             n_shift [NI], n_cap_func [NI], n_cap_obs [NI], n_cc [NI], n_plain [NI];
  int             checks = 0, failures = 0, cycles = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  for (genvar c = 0; c < NI; c++) begin : g_chain
    localparam int unsigned NO = cfg_num_obs(CFGS[c], XW[c]);
    logic [N-1:0]         out, func_in, cc_n;
    logic [N-1:0][NO-1:0] obs_n;

    lite_scan_chain #(
      .N_FF (N), .CFG (CFGS[c]), .XOR_IN (XW[c]), .USE_XNOR (XN[c]), .LITE_EN (EN[c])
    ) dut (
      .clk (clk), .rst (rst), .se (se), .sel (sel), .sel_cc (sel_cc), .si (si),
      .func_in (func_in), .obs_n (obs_n), .cc_n (cc_n), .out (out), .so (so[c])
    );

    lite_chain_checker #(
      .N (N), .CFG (CFGS[c]), .XOR_IN (XW[c]), .USE_XNOR (XN[c]), .LITE_EN (EN[c]), .NPI (NPI)
    ) chk (
      .clk (clk), .rst (rst), .se (se), .sel (sel), .sel_cc (sel_cc), .si (si), .pi (pi),
      .dut_out (out), .dut_so (so[c]), .func_in (func_in), .obs_n (obs_n), .cc_n (cc_n),
      .checks (c_checks[c]), .failures (c_fail[c]), .n_shift (n_shift[c]),
      .n_cap_func (n_cap_func[c]), .n_cap_obs (n_cap_obs[c]), .n_cc (n_cc[c]), .n_plain (n_plain[c])
    );
  end

  task automatic report();
    int tc = checks, tf = failures;
    for (int c = 0; c < NI; c++) begin
      tc += c_checks[c];
      tf += c_fail[c];
    end
    $display("TB_RESULT checks=%0d failures=%0d", tc, tf);
  endtask

  task automatic expect_true(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // one clock; inputs change on the falling edge
  task automatic shift_bit(logic b);
    se = 1'b1; sel_cc = 1'b0; sel = 1'($urandom); si = b; pi = NPI'($urandom);
    @(negedge clk);
  endtask

  task automatic capture(logic s, logic scc);
    se = 1'b0; sel = s; sel_cc = scc; si = 1'($urandom); pi = NPI'($urandom);
    @(negedge clk);
  endtask

  initial begin : watchdog
    wait (cycles == 20000);
    failures++;
    $display("FAIL watchdog expired");
    report();
    $finish;
  end

  initial begin
    rst = 1'b0; se = 1'b0; sel = 1'b0; sel_cc = 1'b0; si = 1'b0; pi = '0;
    #1 rst = 1'b1;
    @(negedge clk) rst = 1'b0;

    // shift latency: a 1 entering a cleared chain appears at so after N clocks
    for (int k = 1; k <= N; k++) begin
      shift_bit(k == 1);
      for (int c = 0; c < NI; c++)
        expect_true($sformatf("chain %0d so after %0d shifts", c, k), so[c] == (k == N));
    end

    for (int p = 0; p < 120; p++) begin
      for (int k = 0; k < N; k++) shift_bit(1'($urandom));
      capture(p[0], p[1]);
      if (p % 3 == 0) capture(1'($urandom), 1'($urandom));
      if (p == 60) begin
        #1 rst = 1'b1;
        @(negedge clk) rst = 1'b0;
      end
    end
    for (int k = 0; k < N; k++) shift_bit(1'($urandom));

    for (int c = 0; c < NI; c++) begin
      $display("chain %0d: shift=%0d capture=%0d xor_capture_changed=%0d cc_override=%0d uninstrumented_capture=%0d",
               c, n_shift[c], n_cap_func[c], n_cap_obs[c], n_cc[c], n_plain[c]);
      expect_true($sformatf("chain %0d shifted", c), n_shift[c] > 0);
      expect_true($sformatf("chain %0d plain capture", c), n_cap_func[c] > 0);
      expect_true($sformatf("chain %0d XOR capture", c), n_cap_obs[c] > 0);
      if (cfg_has_cc(CFGS[c])) expect_true($sformatf("chain %0d cc override", c), n_cc[c] > 0);
      if (EN[c] != '1)         expect_true($sformatf("chain %0d uninstrumented cell", c), n_plain[c] > 0);
    end
    report();
    $finish;
  end

endmodule
