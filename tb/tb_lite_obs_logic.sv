// tb_lite_obs_logic: self-checking testbench for the LITE observability logic.
//
// Instantiates the block for all four configurations, XOR widths 2 to 5 and
// both XOR and XNOR (32 instances) and applies every combination of org, sel
// and five observed-net bits. Each output is compared with a reference
// computed here from the definition: Config1 XORs the first XOR_IN nets,
// Config2 XORs org with the first XOR_IN-1 nets, XNOR inverts, and sel = 0
// passes org.
module tb_lite_obs_logic;
  import lite_pkg::*;

  localparam lite_cfg_e CFGS [4] = '{CONFIG1_OBS, CONFIG2_OBS, CONFIG1_OBS_CC, CONFIG2_OBS_CC};

  logic       clk = 1'b0;
  logic       org, sel;
  logic [4:0] obs_vec;
  logic       d_out [4][4][2];   // [config][XOR width - 2][xnor]
  int         checks = 0, failures = 0;

  always #5 clk = ~clk;

  for (genvar c = 0; c < 4; c++) begin : g_cfg
    for (genvar w = 2; w <= 5; w++) begin : g_w
      for (genvar x = 0; x < 2; x++) begin : g_x
        localparam int unsigned NO = (c == 1 || c == 3) ? w - 1 : w;
        lite_obs_logic #(.CFG(CFGS[c]), .XOR_IN(w), .USE_XNOR(x[0])) dut (
          .org (org),
          .obs (obs_vec[NO-1:0]),
          .sel (sel),
          .d   (d_out[c][w-2][x])
        );
      end
    end
  end

  function automatic logic ref_d(int c, int w, int x, logic o, logic [4:0] v, logic s);
    logic p;
    int   n;
    bit   uses_org;
    uses_org = (c == 1) || (c == 3);
    n = uses_org ? w - 1 : w;
    p = 1'b0;
    for (int k = 0; k < n; k++) p = p ^ v[k];
    if (uses_org) p = p ^ o;
    if (x == 1) p = !p;
    return s ? p : o;
  endfunction

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 128; v++) begin
      {sel, org, obs_vec} = 7'(v);
      @(posedge clk);
      for (int c = 0; c < 4; c++)
        for (int w = 2; w <= 5; w++)
          for (int x = 0; x < 2; x++) begin
            checks++;
            if (d_out[c][w-2][x] !== ref_d(c, w, x, org, obs_vec, sel)) begin
              failures++;
              if (failures < 20)
                $display("FAIL cfg=%0d xor%0d xnor=%0d sel=%0b org=%0b obs=%b: got %0b",
                         c, w, x, sel, org, obs_vec, d_out[c][w-2][x]);
            end
          end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
