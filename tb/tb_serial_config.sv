// tb_serial_config: self-checking test of the configuration master.
//
// With LEN = 37 (not a multiple of 8, so the last byte is partly dropped) the
// bench offers bytes with random gaps, collects the bits sent with cfg_shift,
// and checks them against the byte stream MSB first, that exactly LEN bits are
// sent, that cfg_ld pulses once after the last bit, and that busy falls then.
// A second run at the full chip length checks the bit count and 9-clock byte
// rate.
module tb_serial_config;
  logic clk = 0, rst_n = 0, start = 0, bvalid = 0;
  logic [7:0] bdata;
  logic ready_a, busy_a, si_a, sh_a, ld_a;
  logic ready_b, busy_b, si_b, sh_b, ld_b;
  logic bvalid_b = 0, start_b = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  serial_config #(.LEN(37)) u_a (.clk, .rst_n, .start, .byte_valid(bvalid), .byte_data(bdata),
    .byte_ready(ready_a), .busy(busy_a), .cfg_si(si_a), .cfg_shift(sh_a), .cfg_ld(ld_a));
  serial_config u_b (.clk, .rst_n, .start(start_b), .byte_valid(bvalid_b), .byte_data(8'h5A),
    .byte_ready(ready_b), .busy(busy_b), .cfg_si(si_b), .cfg_shift(sh_b), .cfg_ld(ld_b));

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

  logic [39:0] stream;
  logic [36:0] got;
  int nbits = 0, nld = 0, nbits_b = 0, nld_b = 0, bit_after_ld = 0;
  always @(posedge clk) begin
    if (sh_a) begin got = {got[35:0], si_a}; nbits++; if (nld) bit_after_ld++; end
    if (ld_a) nld++;
    if (sh_b) nbits_b++;
    if (ld_b) nld_b++;
  end

  initial begin
    int cyc;
    stream = {$urandom, 8'($urandom)};
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    start = 1; @(negedge clk); start = 0;
    for (int b = 0; b < 5; b++) begin
      repeat ($urandom % 4) @(negedge clk);
      bdata = stream[39 - 8*b -: 8]; bvalid = 1;
      do @(posedge clk); while (!ready_a);   // byte taken at this edge
      @(negedge clk);
      bvalid = 0;
    end
    repeat (12) @(negedge clk);
    chk(nbits == 37, $sformatf("%0d bits sent", nbits));
    chk(got == stream[39 -: 37], "bits MSB first");
    chk(nld == 1 && bit_after_ld == 0, "one load after the last bit");
    chk(!busy_a, "idle after load");

    // full chip length with an always-valid stream
    start_b = 1; @(negedge clk); start_b = 0; bvalid_b = 1;
    cyc = 0;
    while (busy_b) begin @(negedge clk); cyc++; end
    repeat (2) @(negedge clk);
    chk(nbits_b == 27880 && nld_b == 1, "full-length load");
    chk(cyc >= 27880 / 8 * 9 && cyc <= 27880 / 8 * 9 + 3, $sformatf("%0d clocks", cyc));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
