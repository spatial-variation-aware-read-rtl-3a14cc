// tb_bin_threshold_lut -- self-checking testbench of the bin -> HCfirst lookup.
//
// Checks the power-on mapping (the 14 characterized hammer counts, spare
// codes at the weakest value), the one-cycle latency and tag transport, then
// programs a profile scaled to a worst-case HCfirst of 64 (every value times
// 64 / 32K, as for a module whose weakest row fails at 32K) and checks every
// bin again.
module tb_bin_threshold_lut;
  import svard_pkg::*;

  localparam int unsigned TW = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  bin_t in_bin = '0;
  logic [TW-1:0] in_tag = '0;
  logic out_valid;
  bin_t out_bin;
  hc_t  out_hc;
  logic [TW-1:0] out_tag;
  logic cfg_we = 1'b0;
  bin_t cfg_bin = '0;
  hc_t  cfg_hc = '0;

  int checks = 0, failures = 0;

  // reference values, written out independently of the package
  int unsigned ref_k [16] = '{1, 2, 4, 8, 12, 16, 24, 32, 40, 48, 56, 64, 96, 128, 1, 1};

  bin_threshold_lut #(.TAG_W(TW)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic lookup_check(input int unsigned b, input int unsigned exp_hc);
    logic [TW-1:0] tag;
    tag = TW'($urandom);
    in_valid <= 1'b1; in_bin <= bin_t'(b); in_tag <= tag;
    @(posedge clk);
    in_valid <= 1'b0;
    #1;
    check(out_valid, "out_valid one cycle after in_valid");
    check(out_bin == bin_t'(b), "bin carried");
    check(out_tag == tag, "tag carried");
    check(32'(out_hc) == exp_hc, $sformatf("bin %0d: hc %0d exp %0d", b, out_hc, exp_hc));
  endtask

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int unsigned b = 0; b < 16; b++) lookup_check(b, ref_k[b] * 1024);
    @(posedge clk); #1;
    check(!out_valid, "no out_valid without in_valid");

    // scale the profile to a worst-case HCfirst of 64; module minimum 32K
    for (int unsigned b = 0; b < 16; b++) begin
      int unsigned scaled;
      scaled = (ref_k[b] * 1024) * 64 / (32 * 1024);
      if (scaled == 0) scaled = 64;  // classes below the module minimum: clamp
      cfg_we <= 1'b1; cfg_bin <= bin_t'(b); cfg_hc <= hc_t'(scaled);
      @(posedge clk);
    end
    cfg_we <= 1'b0;
    for (int unsigned b = 0; b < 16; b++) begin
      int unsigned scaled;
      scaled = (ref_k[b] * 1024) * 64 / (32 * 1024);
      if (scaled == 0) scaled = 64;
      lookup_check(b, scaled);
    end

    // write and lookup of the same bin in one cycle: old value comes out
    cfg_we <= 1'b1; cfg_bin <= 4'd13; cfg_hc <= hc_t'(999);
    in_valid <= 1'b1; in_bin <= 4'd13; in_tag <= 8'h5a;
    @(posedge clk);
    cfg_we <= 1'b0; in_valid <= 1'b0;
    #1;
    check(32'(out_hc) == 256, "read-first on same-cycle cfg write");
    lookup_check(13, 999);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
