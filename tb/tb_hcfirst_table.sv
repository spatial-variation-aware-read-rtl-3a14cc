// tb_hcfirst_table -- self-checking testbench of the per-bank bin table.
//
// Uses a 1024-row table. Checks: `ready` stays low for exactly N_ROWS cycles
// after reset (the clearing sweep); lookups during the sweep return the
// weakest bin; after the sweep every row reads the weakest bin; random profile
// writes read back correctly against a shadow array; read-first behaviour on
// a same-cycle read and write; the one-cycle lookup latency.
module tb_hcfirst_table;
  import svard_pkg::*;

  localparam int unsigned N  = 1024;
  localparam int unsigned AW = $clog2(N);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic rd_en = 1'b0, wr_en = 1'b0;
  logic [AW-1:0] rd_row = '0, wr_row = '0;
  bin_t wr_bin = '0;
  logic rd_valid, ready;
  bin_t rd_bin;

  int checks = 0, failures = 0;
  bin_t shadow [N];

  hcfirst_table #(.N_ROWS(N)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // single lookup: returns the bin one clock after rd_en
  task automatic lookup(input logic [AW-1:0] r, output bin_t b);
    rd_en  <= 1'b1;
    rd_row <= r;
    @(posedge clk);
    rd_en <= 1'b0;
    #1;
    check(rd_valid === 1'b1, "rd_valid one cycle after rd_en");
    b = rd_bin;
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned cyc;
    bin_t b;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    #1;
    check(!ready, "not ready right after reset");
    // lookup during the sweep returns the weakest bin
    lookup(AW'(N - 1), b);
    check(b == '0, "lookup during sweep returns bin 0");
    // count the sweep length (reset released one edge before cycle 1)
    cyc = 2;
    while (!ready) begin
      @(posedge clk);
      #1;
      cyc++;
    end
    check(cyc == N, $sformatf("sweep takes N_ROWS cycles (got %0d)", cyc));

    // every row cleared to the weakest bin
    for (int unsigned r = 0; r < N; r++) begin
      lookup(AW'(r), b);
      check(b == '0, $sformatf("row %0d cleared", r));
      shadow[r] = '0;
    end

    // random profile load
    for (int i = 0; i < 3000; i++) begin
      int unsigned r;
      bin_t v;
      r = $urandom_range(N - 1);
      v = bin_t'($urandom);
      wr_en  <= 1'b1;
      wr_row <= AW'(r);
      wr_bin <= v;
      @(posedge clk);
      shadow[r] = v;
    end
    wr_en <= 1'b0;
    for (int unsigned r = 0; r < N; r++) begin
      lookup(AW'(r), b);
      check(b == shadow[r], $sformatf("row %0d: got %0d exp %0d", r, b, shadow[r]));
    end

    // same-cycle read and write: old value comes out, new value is stored
    begin
      bin_t oldv, newv;
      oldv = shadow[77];
      newv = oldv + 4'd5;
      rd_en <= 1'b1; rd_row <= AW'(77);
      wr_en <= 1'b1; wr_row <= AW'(77); wr_bin <= newv;
      @(posedge clk);
      rd_en <= 1'b0; wr_en <= 1'b0;
      #1;
      check(rd_bin == oldv, "read-first on same-cycle write");
      lookup(AW'(77), b);
      check(b == newv, "write after read-first stored");
    end

    // no rd_valid without rd_en
    @(posedge clk); #1;
    check(!rd_valid, "no rd_valid without rd_en");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
