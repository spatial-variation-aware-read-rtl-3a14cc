// tb_svard_hc_sweep -- the worst-case HCfirst sweep run through the Svard unit.
//
// For two module profiles and seven target worst-case HCfirst values
// (4K, 2K, 1K, 512, 256, 128, 64), the testbench scales the profile to the
// target (class value x target / weakest class), programs the translation
// registers, and sends an access stream through Svard: 70 % of the ACTs go to
// 8 hot rows, the rest to random rows of banks 0..3. Every response is checked
// for value and two-cycle latency. A behavioural counter-based defense reacts
// to each response, once with Svard's per-row HCfirst and once with the fixed
// target; the testbench prints the preventive actions of both and checks that
// Svard never needs more, and that rows of the weakest class get exactly as
// many as without Svard.
//
// Profiles (class ranges from the characterization): module S0, rows from 32K
// to 128K; module M0, rows from 8K to 40K. How the rows are spread over the
// classes inside each range is not given, so bins are drawn uniformly. The
// table is 1024 rows per bank; only the Svard side of the evaluation can be
// simulated (no processor, scheduler or real defense).
module tb_svard_hc_sweep;
  import svard_pkg::*;

  localparam int unsigned NR  = 1024;
  int unsigned TGT = 64;          // target worst-case HCfirst of the current run

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

  svard #(.N_ROWS(NR)) dut (.*);

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
  bin_t        s_bin [32][NR];
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
      e.bin  = s_sweeping ? bin_t'(0) : s_bin[{a.rank, a.bank}][a.row];
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
    s_bin[b][r] = v;
  endtask

  task automatic drain();
    repeat (4) step();
    check(expq.size() == 0, "all responses arrived");
  endtask

  int unsigned KTAB [16] = '{1, 2, 4, 8, 12, 16, 24, 32, 40, 48, 56, 64, 96, 128, 1, 1};

  // class value scaled so that the module's weakest class becomes TGT
  function automatic int unsigned scaled(input int unsigned b, input int unsigned min_bin);
    int unsigned v;
    v = KTAB[b] * TGT / KTAB[min_bin];
    return (v < TGT) ? TGT : v;
  endfunction

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // -------------------------------------------------------------- stimulus
  initial begin
    string       pname   [2] = '{"S0", "M0"};
    int unsigned lo_bin  [2] = '{7, 3};     // 32K / 8K
    int unsigned hi_bin  [2] = '{13, 8};    // 128K / 40K
    int unsigned targets [7] = '{4096, 2048, 1024, 512, 256, 128, 64};
    int unsigned hot_b [8], hot_r [8];
    int runs = 0;

    for (int b = 0; b < 16; b++) s_hc[b] = KTAB[b] * 1024;
    repeat (2) step();
    rst_n = 1'b1;
    step();
    wait (ready);
    step();
    s_sweeping = 1'b0;
    for (int b = 0; b < 32; b++) for (int r = 0; r < NR; r++) s_bin[b][r] = '0;

    for (int p = 0; p < 2; p++) begin
      // load the module's profile into banks 0..3
      for (int b = 0; b < 4; b++)
        for (int r = 0; r < NR; r++)
          prof_write(b, r, bin_t'($urandom_range(hi_bin[p], lo_bin[p])));
      // hot rows: half from the weakest class, half from the strongest
      for (int h = 0; h < 8; h++) begin
        hot_b[h] = $urandom_range(3);
        hot_r[h] = $urandom_range(NR - 1);
        prof_write(hot_b[h], hot_r[h], bin_t'(h < 4 ? lo_bin[p] : hi_bin[p]));
      end

      foreach (targets[t]) begin
        int unsigned sv_all, fx_all, sv_weak, fx_weak;
        TGT = targets[t];
        for (int b = 0; b < 16; b++) prog_lut(b, scaled(b, lo_bin[p]));
        cnt_svard.delete(); cnt_fixed.delete(); act_svard.delete(); act_fixed.delete();
        for (int i = 0; i < 40000; i++) begin
          if ($urandom_range(9) < 7) begin
            int h;
            h = $urandom_range(7);
            do_act(mk(hot_b[h], hot_r[h]));
          end else begin
            do_act(mk($urandom_range(3), $urandom_range(NR - 1)));
          end
        end
        drain();
        sv_all = 0; fx_all = 0; sv_weak = 0; fx_weak = 0;
        foreach (act_svard[kk]) begin
          sv_all += act_svard[kk];
          fx_all += act_fixed[kk];
        end
        for (int h = 0; h < 4; h++) begin
          int unsigned k;
          k = key(mk(hot_b[h], hot_r[h]));
          if (act_svard.exists(k)) begin
            sv_weak += act_svard[k];
            fx_weak += act_fixed[k];
          end
        end
        check(sv_all <= fx_all, $sformatf("%s T=%0d: Svard needs no more actions", pname[p], TGT));
        check(sv_weak == fx_weak, $sformatf("%s T=%0d: weakest rows unchanged", pname[p], TGT));
        $display("profile %s  HCfirst %4d: preventive actions %5d with Svard, %5d without (weakest hot rows %0d / %0d)",
                 pname[p], TGT, sv_all, fx_all, sv_weak, fx_weak);
        runs++;
      end
    end
    check(runs == 14, "all 14 configurations ran");
    check(n_prevent > 0, "preventive actions occurred");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
