// tb_lite_random_coverage: stuck-at fault coverage under random scan patterns,
// with and without LITE, on a small circuit built to resist random patterns.
//
// Two copies of an 8-cell chain inside rpr_circuit run side by side, one
// fault-free and one with a stuck-at fault; a fault counts as detected when
// the unloaded responses or the primary output differ. Every pattern is a
// random 8-bit load, one capture clock with random primary inputs, and the
// unload during the next load. Three modes are compared over the same twelve
// faults (stuck-at-0 and -1 on six internal nets), up to 4000 patterns each:
//   baseline        CONFIG1_OBS_CC chain with sel = sel_cc = 0 throughout,
//                   which is plain scan;
//   Config1_Obs_CC  sel random per pattern, sel_cc = 1 on a quarter of them;
//   Config2_Obs_CC  the same on a Config2 chain.
// Coverage after 500, 1000, 2000 and 4000 patterns is printed. The checks:
// the fault-free pair never disagrees, each LITE mode detects more faults
// than the baseline, and Config1_Obs_CC detects all twelve.
module tb_lite_random_coverage;
  import lite_pkg::*;

  localparam int N_FAULT = 12;
  localparam int P_MAX   = 4000;
  localparam int NM      = 3;
  localparam int MARKS [4] = '{500, 1000, 2000, 4000};

  logic       clk = 1'b0;
  logic       rst, se, sel, sel_cc, si;
  logic [7:0] pi;
  int         fault_id;
  logic       fault_val;
  int         pair;   // 0: Config1 chains, 1: Config2 chains
  int         checks = 0, failures = 0, cycles = 0;
  int         det_at [NM][N_FAULT];

  logic so_g [2], so_f [2], po_g [2], po_f [2];

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  for (genvar c = 0; c < 2; c++) begin : g_pair
    localparam lite_cfg_e CFG = (c == 0) ? CONFIG1_OBS_CC : CONFIG2_OBS_CC;
    localparam int unsigned NO = cfg_num_obs(CFG, 2);
    for (genvar f = 0; f < 2; f++) begin : g_copy   // 0 fault-free, 1 faulty
      logic [7:0]         out, func_in, cc_n;
      logic [7:0][NO-1:0] obs_n;
      logic               so, po;
      rpr_circuit #(.N_OBS(NO)) cut (
        .pi (pi), .out (out), .fault_id (f == 1 ? fault_id : -1), .fault_val (fault_val),
        .func_in (func_in), .obs_n (obs_n), .cc_n (cc_n), .po (po)
      );
      lite_scan_chain #(.N_FF(8), .CFG(CFG), .XOR_IN(2)) dut (
        .clk (clk), .rst (rst), .se (se), .sel (sel), .sel_cc (sel_cc), .si (si),
        .func_in (func_in), .obs_n (obs_n), .cc_n (cc_n), .out (out), .so (so)
      );
    end
    assign so_g[c] = g_copy[0].so;
    assign so_f[c] = g_copy[1].so;
    assign po_g[c] = g_copy[0].po;
    assign po_f[c] = g_copy[1].po;
  end

  task automatic expect_true(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin : watchdog
    wait (cycles == 2_000_000);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Apply up to npat patterns; returns the index of the first pattern whose
  // response differs between the two copies, or -1.
  task automatic run_patterns(int mode, int npat, output int hit);
    bit lite = (mode != 0);
    hit = -1;
    rst = 1'b0;
    #1 rst = 1'b1;
    @(negedge clk) rst = 1'b0;
    for (int p = 0; p <= npat && hit < 0; p++) begin
      for (int k = 0; k < 8; k++) begin
        se = 1'b1; sel_cc = 1'b0; sel = 1'b0; si = 1'($urandom);
        #1 if (p > 0 && so_g[pair] != so_f[pair]) hit = p - 1;
        @(negedge clk);
      end
      if (p == npat) break;
      se = 1'b0; pi = 8'($urandom);
      sel    = lite ? 1'($urandom) : 1'b0;
      sel_cc = lite ? ($urandom_range(0, 3) == 0) : 1'b0;
      #1 if (hit < 0 && po_g[pair] != po_f[pair]) hit = p;
      @(negedge clk);
    end
  endtask

  initial begin
    int hit;
    rst = 1'b0; se = 1'b0; sel = 1'b0; sel_cc = 1'b0; si = 1'b0; pi = '0;
    fault_id = -1; fault_val = 1'b0; pair = 0;

    // fault-free copies must agree
    for (int c = 0; c < 2; c++) begin
      pair = c;
      run_patterns(1, 300, hit);
      expect_true($sformatf("fault-free copies agree (pair %0d)", c), hit < 0);
    end

    for (int mode = 0; mode < NM; mode++) begin
      pair = (mode == 2) ? 1 : 0;
      for (int f = 0; f < N_FAULT; f++) begin
        fault_id  = f / 2;
        fault_val = f[0];
        run_patterns(mode, P_MAX, hit);
        det_at[mode][f] = hit;
      end
      fault_id = -1;
    end

    begin
      string names [NM] = '{"baseline scan   ", "Config1_Obs_CC  ", "Config2_Obs_CC  "};
      int    total [NM];
      $display("stuck-at coverage of %0d faults vs. random patterns:", N_FAULT);
      $display("                  %6d %6d %6d %6d", MARKS[0], MARKS[1], MARKS[2], MARKS[3]);
      for (int mode = 0; mode < NM; mode++) begin
        int cov [4];
        for (int j = 0; j < 4; j++) begin
          cov[j] = 0;
          for (int f = 0; f < N_FAULT; f++)
            if (det_at[mode][f] >= 0 && det_at[mode][f] < MARKS[j]) cov[j]++;
        end
        total[mode] = cov[3];
        $display("%s  %6d %6d %6d %6d", names[mode], cov[0], cov[1], cov[2], cov[3]);
      end
      expect_true("Config1_Obs_CC detects more faults than the baseline", total[1] > total[0]);
      expect_true("Config2_Obs_CC detects more faults than the baseline", total[2] > total[0]);
      expect_true("Config1_Obs_CC detects every fault", total[1] == N_FAULT);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
