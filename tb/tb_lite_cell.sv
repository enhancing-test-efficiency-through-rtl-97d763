// tb_lite_cell: self-checking testbench for one LITE-instrumented scan cell.
//
// Six cells run side by side on the same random stimulus: the four
// configurations with XOR2, Config2_Obs_CC with XOR3 and XNOR, and a cell
// built without instrumentation (LITE_EN = 0). Every cycle the testbench
// checks out and so of each cell against a reference written from the cell
// definition (shift from si, capture of the original logic or of the XOR,
// output mux on sel_cc), and counts how often the observability capture and
// the controllability mux changed a value, so that both are known to have
// been exercised. rst is pulsed part-way through to check the reset.
module tb_lite_cell;
  import lite_pkg::*;

  localparam int NC = 6;
  localparam lite_cfg_e CFGS [NC] = '{CONFIG1_OBS, CONFIG2_OBS, CONFIG1_OBS_CC, CONFIG2_OBS_CC,
                                      CONFIG2_OBS_CC, CONFIG1_OBS_CC};
  localparam int        XW   [NC] = '{2, 2, 2, 2, 3, 2};
  localparam bit        XN   [NC] = '{0, 0, 0, 0, 1, 0};
  localparam bit        EN   [NC] = '{1, 1, 1, 1, 1, 0};

  logic       clk = 1'b0;
  logic       rst, se, sel, sel_cc, func_in, cc_n, si;
  logic [4:0] obs_vec;
  logic       out [NC], so [NC];
  logic       m_q [NC];
  int         checks = 0, failures = 0;
  int         n_obs_effect = 0, n_cc_effect = 0, n_shift = 0, n_reset = 0;

  always #5 clk = ~clk;

  for (genvar c = 0; c < NC; c++) begin : g_cell
    localparam int unsigned NO = (CFGS[c] == CONFIG2_OBS || CFGS[c] == CONFIG2_OBS_CC) ? XW[c] - 1 : XW[c];
    lite_cell #(.CFG(CFGS[c]), .XOR_IN(XW[c]), .USE_XNOR(XN[c]), .LITE_EN(EN[c])) dut (
      .clk     (clk),
      .rst     (rst),
      .se      (se),
      .sel     (sel),
      .sel_cc  (sel_cc),
      .func_in (func_in),
      .obs_n   (obs_vec[NO-1:0]),
      .cc_n    (cc_n),
      .si      (si),
      .out     (out[c]),
      .so      (so[c])
    );
  end

  function automatic bit is_cfg2(int c);
    return CFGS[c] == CONFIG2_OBS || CFGS[c] == CONFIG2_OBS_CC;
  endfunction

  function automatic bit is_cc(int c);
    return EN[c] && (CFGS[c] == CONFIG1_OBS_CC || CFGS[c] == CONFIG2_OBS_CC);
  endfunction

  function automatic logic xor_of(int c);
    logic p = 1'b0;
    int   n = is_cfg2(c) ? XW[c] - 1 : XW[c];
    for (int k = 0; k < n; k++) p ^= obs_vec[k];
    if (is_cfg2(c)) p ^= func_in;
    if (XN[c])      p = !p;
    return p;
  endfunction

  function automatic logic exp_out(int c);
    return (is_cc(c) && sel_cc) ? cc_n : m_q[c];
  endfunction

  task automatic check(string what, int c, logic got, logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s cell %0d: got %0b expected %0b at %0t", what, c, got, exp, $time);
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1'b0; se = 1'b0; sel = 1'b0; sel_cc = 1'b0; func_in = 1'b0; cc_n = 1'b0; si = 1'b0;
    obs_vec = '0;
    #1 rst = 1'b1;
    for (int c = 0; c < NC; c++) m_q[c] = 1'b0;
    #1 for (int c = 0; c < NC; c++) check("reset", c, out[c], 1'b0);
    n_reset++;
    @(negedge clk) rst = 1'b0;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      se      = ($urandom_range(0, 2) == 0);
      sel     = 1'($urandom);
      sel_cc  = se ? 1'b0 : 1'($urandom);
      func_in = 1'($urandom);
      cc_n    = 1'($urandom);
      si      = 1'($urandom);
      obs_vec = 5'($urandom);
      #1;
      for (int c = 0; c < NC; c++) begin
        check("out", c, out[c], exp_out(c));
        check("so",  c, so[c],  exp_out(c));
      end
      if (!se && sel && xor_of(0) != func_in) n_obs_effect++;
      if (!se && sel_cc && cc_n != m_q[2]) n_cc_effect++;
      if (se) n_shift++;
      @(posedge clk);
      for (int c = 0; c < NC; c++)
        m_q[c] = se ? si : ((EN[c] && sel) ? xor_of(c) : func_in);
      #1 for (int c = 0; c < NC; c++)
        if (!(is_cc(c) && sel_cc)) check("q after edge", c, out[c], m_q[c]);
      if (cyc == 2000) begin
        #1 rst = 1'b1;
        for (int c = 0; c < NC; c++) m_q[c] = 1'b0;
        #1 for (int c = 0; c < NC; c++)
          if (!(is_cc(c) && sel_cc)) check("async reset", c, out[c], 1'b0);
        rst = 1'b0;
        n_reset++;
      end
      @(negedge clk);
    end
    checks++;
    if (n_obs_effect == 0 || n_cc_effect == 0 || n_shift == 0 || n_reset < 2) begin
      failures++;
      $display("FAIL mechanism not exercised");
    end
    $display("mechanisms: shift=%0d obs_capture_changed=%0d cc_override=%0d reset=%0d",
             n_shift, n_obs_effect, n_cc_effect, n_reset);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
