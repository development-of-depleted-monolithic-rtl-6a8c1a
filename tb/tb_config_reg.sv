// tb_config_reg: self-checking test of the configuration register at full
// size (36 x 129 pixels, 27880 bits).
//
// Shifts in a pseudo-random bit vector MSB first, checks that the outputs do
// not change before the load strobe, then loads and checks the global codes
// and a set of pixel fields against the vector, and finally checks the serial
// read-back output against the vector's MSBs.
module tb_config_reg;
  import lfm_pkg::*;
  localparam int COLS = N_COLS, ROWS = N_ROWS;
  localparam int LEN = GLOB_CFG_W + COLS * ROWS * PIX_CFG_W;

  logic clk = 0, rst_n = 0, si = 0, shift = 0, ld = 0, so;
  pix_cfg_t [COLS-1:0][ROWS-1:0] pix_cfg;
  glob_cfg_t glob_cfg;
  logic [LEN-1:0] vec;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  config_reg #(.COLS(COLS), .ROWS(ROWS)) dut (.clk, .rst_n, .si, .shift, .ld, .so, .pix_cfg, .glob_cfg);

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int p;
    for (int i = 0; i < LEN; i++) vec[i] = 1'($urandom);
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    chk(pix_cfg == '0 && glob_cfg == '0, "reset values");
    shift = 1;
    for (int i = LEN - 1; i >= 0; i--) begin si = vec[i]; @(negedge clk); end
    shift = 0;
    chk(pix_cfg == '0 && glob_cfg == '0, "outputs held until load");
    ld = 1; @(negedge clk); ld = 0; @(negedge clk);
    chk(glob_cfg.th_dac  == vec[LEN-1 -: 8], "threshold code");
    chk(glob_cfg.inj_dac == vec[LEN-9 -: 8], "injection code");
    for (int c = 0; c < COLS; c++)
      for (int r = 0; r < ROWS; r += 7) begin
        p = c * ROWS + r;
        chk(pix_cfg[c][r] == pix_cfg_t'(vec[p*PIX_CFG_W +: PIX_CFG_W]), $sformatf("pixel %0d,%0d", c, r));
      end
    chk(pix_cfg[COLS-1][ROWS-1].tdac == vec[LEN-GLOB_CFG_W-1 -: 4], "last pixel tdac");
    chk(pix_cfg[0][0].en == vec[0], "pixel 0 enable");
    // read-back: the first bits shifted in leave first
    shift = 1;
    for (int i = LEN - 1; i >= LEN - 64; i--) begin
      chk(so == vec[i], "read-back bit");
      si = 0; @(negedge clk);
    end
    shift = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
