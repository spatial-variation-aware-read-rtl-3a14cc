// tb_meta_bin_capture -- self-checking testbench of the DRAM-metadata bin path.
//
// Drives random ACT commands and read returns over all 32 banks and keeps a
// reference model (per bank: open row, waiting-for-first-read flag). Checks
// that exactly the first read after each ACT yields a bin, with the open
// row's address and the metadata bits, one cycle after the read return, and
// that an ACT and a read of the same bank in one cycle do not capture.
module tb_meta_bin_capture;
  import svard_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic act_valid = 1'b0;
  row_addr_t act_addr = '0;
  logic rd_valid = 1'b0;
  logic [RANK_W-1:0] rd_rank = '0;
  logic [BANK_W-1:0] rd_bank = '0;
  bin_t rd_meta = '0;
  logic bin_valid;
  row_addr_t bin_addr;
  bin_t bin;

  int checks = 0, failures = 0;
  int captures = 0, ignored_reads = 0, collisions = 0;

  bit               m_pending [32];
  logic [ROW_W-1:0] m_row     [32];

  meta_bin_capture dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit exp_valid;
    row_addr_t exp_addr;
    bin_t exp_bin;
    for (int b = 0; b < 32; b++) m_pending[b] = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    exp_valid = 0;
    exp_addr = '0;
    exp_bin = '0;
    for (int i = 0; i < 20000; i++) begin
      bit a, r;
      int ab, rb;
      row_addr_t aa;
      bin_t meta;
      a  = ($urandom_range(3) == 0);
      r  = ($urandom_range(1) == 0);
      ab = $urandom_range(31);
      rb = (i % 50 == 7) ? ab : $urandom_range(31);   // force some collisions
      aa.rank = RANK_W'(ab >> 4);
      aa.bank = BANK_W'(ab);
      aa.row  = ROW_W'($urandom);
      meta    = bin_t'($urandom);
      act_valid <= a; act_addr <= aa;
      rd_valid  <= r; rd_rank <= RANK_W'(rb >> 4); rd_bank <= BANK_W'(rb); rd_meta <= meta;
      // reference model for this cycle's inputs
      exp_valid = 0;
      if (r && m_pending[rb] && !(a && ab == rb)) begin
        exp_valid = 1;
        exp_addr  = '{rank: RANK_W'(rb >> 4), bank: BANK_W'(rb), row: m_row[rb]};
        exp_bin   = meta;
        m_pending[rb] = 0;
        captures++;
      end else if (r) begin
        ignored_reads++;
        if (a && ab == rb) collisions++;
      end
      if (a) begin
        m_pending[ab] = 1;
        m_row[ab] = aa.row;
      end
      // registered outputs, one clock after the inputs are sampled
      @(posedge clk);
      #1;
      check(bin_valid == exp_valid, $sformatf("cycle %0d bin_valid", i));
      if (exp_valid && bin_valid) begin
        check(bin_addr == exp_addr, "bin address");
        check(bin == exp_bin, "bin value");
      end
    end
    act_valid <= 1'b0; rd_valid <= 1'b0;
    @(posedge clk); #1;
    check(!bin_valid, "no capture without a read");
    check(captures > 100 && ignored_reads > 100 && collisions > 0, "all cases exercised");
    $display("captures=%0d ignored_reads=%0d collisions=%0d", captures, ignored_reads, collisions);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
