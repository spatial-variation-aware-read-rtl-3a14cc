// tb_svard_full -- the end-to-end test of tb_svard at full size: the Svard
// unit with its default parameters (2 ranks x 16 banks x 128K rows), every row
// of every bank loaded with a profile bin. The profile is a fixed hash of the
// bank and row (bins 7..13), so the reference needs no stored copy of it.
// Otherwise as in tb_svard:
//
// Plays the memory controller around Svard: it issues ACT commands, returns
// read data with metadata bits, loads a vulnerability profile and programs the
// bin -> HCfirst registers. An independent reference (shadow profile and
// shadow register file) predicts every response, which must arrive exactly two
// cycles after its ACT (or after the first read, for the DRAM-metadata
// source).
//
// A small behavioural read disturbance defense stands in for the existing
// solution: per-row activation counters that take a preventive action when a
// row's count reaches its threshold. It runs twice on the same ACT stream,
// once with the HCfirst Svard supplies and once with the fixed worst-case
// HCfirst, to show that Svard keeps the action rate of the weakest rows and
// cuts it for stronger rows.
//
// The profile imitates a module whose rows fail between 32K and 128K hammers,
// scaled to a worst-case HCfirst of 64 (every value x 64/32K).
//
// Mechanisms counted (each must occur): lookup during the reset sweep, table
// lookup, back-to-back lookups, profile update in the field, threshold
// register reprogramming, metadata capture, metadata read ignored, mode
// switch, preventive action.
module tb_svard_full;
  import svard_pkg::*;

  localparam int unsigned NR  = ROWS_PER_BANK;
  localparam int unsigned TGT = 64;          // target worst-case HCfirst
  localparam int unsigned MIN = 32 * 1024;   // module's weakest characterized row

  logic clk = 1'b0, rst_n = 1'b0;
  logic cfg_use_dram_meta = 1'b0;
  logic act_valid = 1'b0;
  row_addr_t act_addr = '0;
  logic rd_valid = 1'b0;
  logic [RANK_W-1:0] rd_rank = '0;
  logic [BANK_W-1:0] rd_bank = '0;
  bin_t rd_meta = '0;
  logic prof_we = 1'b0;
  row_addr_t prof_addr = '0;
  bin_t prof_bin = '0;
  logic lut_we = 1'b0;
  bin_t lut_bin = '0;
  hc_t  lut_hc = '0;
  logic ready;
  logic resp_valid;
  hc_resp_t resp;

  svard dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  // ---------------------------------------------------------------- reference
  // profile: fixed hash of bank and row, overridden for a few rows
  bin_t s_over [int unsigned];
  function automatic bin_t hash_bin(input int unsigned b, input int unsigned r);
    int unsigned h;
    h = (r * 32'd2654435761) ^ (b * 32'd40503);
    return bin_t'(7 + (h >> 13) % 7);
  endfunction
  bit s_loaded = 1'b0;
  function automatic bin_t s_bin_of(input int unsigned b, input int unsigned r);
    if (s_over.exists(b * NR + r)) return s_over[b * NR + r];
    return s_loaded ? hash_bin(b, r) : bin_t'(0);
  endfunction
  int unsigned s_hc  [16];
  bit          s_sweeping = 1'b1;

  typedef struct {
    row_addr_t   addr;
    bin_t        bin;
    int unsigned hc;
    int unsigned due;
  } exp_t;
  exp_t expq[$];

  // mechanism counters
  int n_sweep_lookup = 0, n_lookup = 0, n_b2b = 0, n_update = 0, n_lut_prog = 0;
  int n_meta_capture = 0, n_meta_ignored = 0, n_mode_switch = 0, n_prevent = 0;

  // behavioural defense: activation counters, Svard thresholds vs fixed one
  int unsigned cnt_svard [int unsigned];
  int unsigned cnt_fixed [int unsigned];
  int unsigned act_svard [int unsigned];
  int unsigned act_fixed [int unsigned];

  function automatic int unsigned key(input row_addr_t a);
    return int'(a);
  endfunction

  // -------------------------------------------------------------- monitor
  initial begin : monitor
    forever begin
      @(posedge clk);
      #1;
      if (resp_valid) begin
        if (expq.size() == 0) begin
          check(1'b0, "unexpected response");
        end else begin
          exp_t e;
          e = expq.pop_front();
          check(e.due == cyc, $sformatf("latency: due %0d now %0d", e.due, cyc));
          check(resp.addr == e.addr, "response address");
          check(resp.bin == e.bin, $sformatf("bin got %0d exp %0d", resp.bin, e.bin));
          check(32'(resp.hcfirst) == e.hc,
                $sformatf("hcfirst got %0d exp %0d", resp.hcfirst, e.hc));
          // the defense reacts to the activation
          begin
            int unsigned k;
            k = key(resp.addr);
            if (!cnt_svard.exists(k)) begin
              cnt_svard[k] = 0; cnt_fixed[k] = 0; act_svard[k] = 0; act_fixed[k] = 0;
            end
            cnt_svard[k]++;
            cnt_fixed[k]++;
            if (cnt_svard[k] >= 32'(resp.hcfirst)) begin
              cnt_svard[k] = 0; act_svard[k]++; n_prevent++;
            end
            if (cnt_fixed[k] >= TGT) begin
              cnt_fixed[k] = 0; act_fixed[k]++;
            end
          end
        end
      end else if (expq.size() != 0) begin
        check(expq[0].due > cyc, "response missing");
        if (expq[0].due <= cyc) void'(expq.pop_front());
      end
    end
  end

  // -------------------------------------------------------------- drivers
  // drivers change inputs (blocking) 1 time unit after a clock edge, when
  // `cyc` already counts that edge; an ACT driven at cycle c is answered at
  // cycle c + 2
  task automatic step();
    @(posedge clk);
    #1;
  endtask

  function automatic row_addr_t mk(input int unsigned b, input int unsigned r);
    row_addr_t a;
    a.rank = RANK_W'(b >> 4);
    a.bank = BANK_W'(b);
    a.row  = ROW_W'(r);
    return a;
  endfunction

  task automatic do_act(input row_addr_t a);
    act_valid = 1'b1;
    act_addr = a;
    if (!cfg_use_dram_meta) begin
      exp_t e;
      e.addr = a;
      e.bin  = s_sweeping ? bin_t'(0) : s_bin_of({a.rank, a.bank}, a.row);
      e.hc   = s_hc[e.bin];
      e.due  = cyc + 2;
      expq.push_back(e);
      n_lookup++;
      if (s_sweeping) n_sweep_lookup++;
    end
    step();
    act_valid = 1'b0;
  endtask

  task automatic do_read(input int unsigned b, input bin_t meta, input bit first,
                         input int unsigned open_row);
    rd_valid = 1'b1;
    rd_rank = RANK_W'(b >> 4);
    rd_bank = BANK_W'(b);
    rd_meta = meta;
    if (first) begin
      exp_t e;
      e.addr = mk(b, open_row);
      e.bin  = meta;
      e.hc   = s_hc[meta];
      e.due  = cyc + 2;
      expq.push_back(e);
      n_meta_capture++;
    end else begin
      n_meta_ignored++;
    end
    step();
    rd_valid = 1'b0;
  endtask

  task automatic prog_lut(input int unsigned b, input int unsigned hc);
    lut_we = 1'b1; lut_bin = bin_t'(b); lut_hc = hc_t'(hc);
    step();
    lut_we = 1'b0;
    s_hc[b] = hc;
    n_lut_prog++;
  endtask

  task automatic prof_write(input int unsigned b, input int unsigned r, input bin_t v);
    prof_we = 1'b1; prof_addr = mk(b, r); prof_bin = v;
    step();
    prof_we = 1'b0;
    s_over[b * NR + r] = v;
  endtask

  task automatic drain();
    repeat (4) step();
    check(expq.size() == 0, "all responses arrived");
  endtask

  function automatic int unsigned scaled(input int unsigned b);
    int unsigned k [16] = '{1, 2, 4, 8, 12, 16, 24, 32, 40, 48, 56, 64, 96, 128, 1, 1};
    int unsigned v;
    v = k[b] * 1024 * TGT / MIN;
    return (v < TGT) ? TGT : v;
  endfunction

  initial begin : watchdog
    repeat (6000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // -------------------------------------------------------------- stimulus
  initial begin
    int unsigned k [16] = '{1, 2, 4, 8, 12, 16, 24, 32, 40, 48, 56, 64, 96, 128, 1, 1};
    for (int b = 0; b < 16; b++) s_hc[b] = k[b] * 1024;
    repeat (2) step();
    rst_n = 1'b1;
    step();

    // 1) lookups while the tables clear themselves: weakest bin, power-on HC
    check(!ready, "not ready during sweep");
    for (int i = 0; i < 40; i++) do_act(mk($urandom_range(31), $urandom_range(NR - 1)));
    drain();
    wait (ready);
    step();
    s_sweeping = 1'b0;

    // 2) power-on translation of every row after the sweep (bin 0 = 1K)
    for (int i = 0; i < 200; i++) do_act(mk($urandom_range(31), $urandom_range(NR - 1)));
    drain();

    // 3) program the scaled profile and load the per-row bins (32K..128K rows)
    for (int b = 0; b < 16; b++) prog_lut(b, scaled(b));
    for (int b = 0; b < 32; b++)
      for (int r = 0; r < NR; r++)
        prof_write(b, r, hash_bin(b, r));
    s_over.delete();
    s_loaded = 1'b1;

    // 4) random lookups, back to back every cycle
    for (int i = 0; i < 5000; i++) begin
      do_act(mk($urandom_range(31), $urandom_range(NR - 1)));
      n_b2b++;
    end
    drain();

    // 5) hammer a weak and a strong row of bank 3; defense reacts
    prof_write(3, 100, 4'd7);    // 32K -> scaled 64
    prof_write(3, 102, 4'd13);   // 128K -> scaled 256
    foreach (cnt_svard[kk]) begin
      cnt_svard[kk] = 0; cnt_fixed[kk] = 0; act_svard[kk] = 0; act_fixed[kk] = 0;
    end
    for (int i = 0; i < 2048; i++) begin
      do_act(mk(3, 100));
      do_act(mk(3, 102));
    end
    drain();
    check(act_svard[key(mk(3, 100))] == act_fixed[key(mk(3, 100))],
          "weakest row protected as without Svard");
    check(act_fixed[key(mk(3, 102))] == 2048 / TGT, "fixed threshold action count");
    check(act_svard[key(mk(3, 102))] == 2048 / 256, "Svard action count for strong row");
    $display("strong row: preventive actions %0d with Svard, %0d without",
             act_svard[key(mk(3, 102))], act_fixed[key(mk(3, 102))]);

    // 6) aging: row 102 now fails earlier -> update its bin in the field
    prof_write(3, 102, 4'd5);    // 16K -> clamps to 64
    n_update++;
    do_act(mk(3, 102));
    drain();

    // 7) rescale the whole profile to a target of 128 without touching the table
    for (int b = 0; b < 16; b++) prog_lut(b, 2 * scaled(b));
    for (int i = 0; i < 300; i++) do_act(mk($urandom_range(31), $urandom_range(NR - 1)));
    drain();

    // 8) switch to the DRAM-metadata source
    cfg_use_dram_meta = 1'b1;
    n_mode_switch++;
    step();
    for (int i = 0; i < 500; i++) begin
      int unsigned b, r;
      bin_t m;
      b = $urandom_range(31);
      r = $urandom_range(NR - 1);
      m = bin_t'($urandom_range(13, 7));
      do_act(mk(b, r));
      repeat ($urandom_range(3)) step();
      do_read(b, m, 1'b1, r);
      repeat ($urandom_range(2)) do_read(b, bin_t'($urandom), 1'b0, r);
    end
    drain();

    // 9) and back to the table
    cfg_use_dram_meta = 1'b0;
    n_mode_switch++;
    step();
    for (int i = 0; i < 300; i++) do_act(mk($urandom_range(31), $urandom_range(NR - 1)));
    drain();

    $display("mechanisms: sweep_lookup=%0d lookup=%0d back_to_back=%0d update=%0d lut_prog=%0d",
             n_sweep_lookup, n_lookup, n_b2b, n_update, n_lut_prog);
    $display("            meta_capture=%0d meta_ignored=%0d mode_switch=%0d preventive=%0d",
             n_meta_capture, n_meta_ignored, n_mode_switch, n_prevent);
    check(n_sweep_lookup > 0, "mechanism: lookup during sweep");
    check(n_lookup > 0, "mechanism: table lookup");
    check(n_b2b > 0, "mechanism: back-to-back lookups");
    check(n_update > 0, "mechanism: profile update");
    check(n_lut_prog > 0, "mechanism: threshold reprogramming");
    check(n_meta_capture > 0, "mechanism: metadata capture");
    check(n_meta_ignored > 0, "mechanism: later reads ignored");
    check(n_mode_switch > 0, "mechanism: mode switch");
    check(n_prevent > 0, "mechanism: preventive action");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
