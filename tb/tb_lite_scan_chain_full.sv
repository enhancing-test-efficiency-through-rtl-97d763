// tb_lite_scan_chain_full: the LITE scan chain at its default size
// (6062 cells, CONFIG1_OBS_CC, XOR2, every cell instrumented) through
// complete scan-test operations.
//
// The chain sits in the stand-in circuit of cut_model and is checked every
// cycle by lite_chain_checker. After reset, a single 1 is shifted into the
// cleared chain and must reach so after exactly 6062 clocks. Then four
// patterns are loaded, each followed by one capture clock with a different
// setting of sel / sel_cc (plain capture, XOR capture, XOR capture with the
// controllability override, override alone); each load unloads the previous
// response, and a last unload follows. It fails if any of those mechanisms
// never changed a value.
module tb_lite_scan_chain_full;
  import lite_pkg::*;

  localparam int unsigned N     = 6062;   // default N_FF of lite_scan_chain
  localparam int unsigned N_OBS = 2;      // CONFIG1_OBS_CC with XOR2
  localparam int unsigned NPI   = 8;

  logic                    clk = 1'b0;
  logic                    rst, se, sel, sel_cc, si, so;
  logic [NPI-1:0]          pi;
  logic [N-1:0]            out, func_in, cc_n;
  logic [N-1:0][N_OBS-1:0] obs_n;
  int c_checks, c_fail, n_shift, n_cap_func, n_cap_obs, n_cc, n_plain;
  int checks = 0, failures = 0, cycles = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  lite_scan_chain dut (
    .clk (clk), .rst (rst), .se (se), .sel (sel), .sel_cc (sel_cc), .si (si),
    .func_in (func_in), .obs_n (obs_n), .cc_n (cc_n), .out (out), .so (so)
  );

  lite_chain_checker #(.N (N), .CFG (CONFIG1_OBS_CC), .XOR_IN (2), .NPI (NPI)) chk (
    .clk (clk), .rst (rst), .se (se), .sel (sel), .sel_cc (sel_cc), .si (si), .pi (pi),
    .dut_out (out), .dut_so (so), .func_in (func_in), .obs_n (obs_n), .cc_n (cc_n),
    .checks (c_checks), .failures (c_fail), .n_shift (n_shift), .n_cap_func (n_cap_func),
    .n_cap_obs (n_cap_obs), .n_cc (n_cc), .n_plain (n_plain)
  );

  task automatic report();
    $display("TB_RESULT checks=%0d failures=%0d", checks + c_checks, failures + c_fail);
  endtask

  task automatic expect_true(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic shift_bit(logic b);
    se = 1'b1; sel_cc = 1'b0; sel = 1'($urandom); si = b; pi = NPI'($urandom);
    @(negedge clk);
  endtask

  task automatic capture(logic s, logic scc);
    se = 1'b0; sel = s; sel_cc = scc; si = 1'($urandom); pi = NPI'($urandom);
    @(negedge clk);
  endtask

  initial begin : watchdog
    wait (cycles == 8 * N);
    failures++;
    $display("FAIL watchdog expired");
    report();
    $finish;
  end

  initial begin
    int first_one;
    rst = 1'b0; se = 1'b0; sel = 1'b0; sel_cc = 1'b0; si = 1'b0; pi = '0;
    #1 rst = 1'b1;
    @(negedge clk) rst = 1'b0;

    first_one = 0;
    for (int k = 1; k <= N; k++) begin
      shift_bit(k == 1);
      if (so && first_one == 0) first_one = k;
    end
    expect_true($sformatf("shift latency %0d, expected %0d", first_one, N), first_one == N);

    for (int p = 0; p < 4; p++) begin
      for (int k = 0; k < N; k++) shift_bit(1'($urandom));
      capture(p == 1 || p == 2, p >= 2);
    end
    for (int k = 0; k < N; k++) shift_bit(1'($urandom));

    $display("shift=%0d capture=%0d xor_capture_changed=%0d cc_override=%0d",
             n_shift, n_cap_func, n_cap_obs, n_cc);
    expect_true("shifted", n_shift > 0);
    expect_true("plain capture", n_cap_func > 0);
    expect_true("XOR capture", n_cap_obs > 0);
    expect_true("cc override", n_cc > 0);
    report();
    $finish;
  end

endmodule
