// svard -- spatial variation-aware threshold unit of the memory controller.
//
// Read disturbance defenses (probabilistic refresh, activation counters,
// throttling, row swapping) decide on a preventive action by comparing a value
// of their own against a threshold derived from HCfirst, the hammer count
// that causes the first bitflip. Configured for the weakest row of a chip, they
// over-protect the many rows that tolerate an order of magnitude more
// activations. Svard supplies the defense, on every row activation, with the
// HCfirst of the row just activated.
//
// Datapath:
//   * profile source A (cfg_use_dram_meta = 0): one hcfirst_table per bank
//     (N_RANKS x N_BANKS tables of N_ROWS x 4 bits). The ACT's bank selects a
//     table, its row address indexes it.
//   * profile source B (cfg_use_dram_meta = 1): meta_bin_capture takes the bin
//     from the metadata bits returned with the first read after the ACT.
//   * bin_threshold_lut turns the 4-bit bin into HCfirst (16 programmable
//     entries, so the profile can be rescaled without touching the table).
//   The result (activated row, bin, HCfirst) goes out on resp_*.
//
// Interface: act_* mirrors the ACT commands on the DRAM command bus; rd_*
// carries the metadata of read data returns (source B only); prof_* writes
// a row's bin into the table; lut_* programs a bin's HCfirst. cfg_use_dram_meta
// is a static mode input, to be changed only while no lookup is in flight.
// `ready` rises when every table has finished its reset sweep (all rows set to
// the weakest bin); profile writes must wait for it, lookups need not.
//
// Timing, source A: ACT in cycle t -> resp_valid in cycle t+2 (table read,
// then bin translation), overlapped with the row activation. Source B: read
// return in cycle t -> resp_valid in cycle t+2. One lookup per cycle.
//
// What follows the paper: the per-row 4-bit bin, the per-bank table in the
// memory controller indexed by the activated row, the alternative of metadata
// bits fetched with the first read, and handing HCfirst to the defense. The
// mode input that lets both sources coexist, the register stages and the
// reset behaviour are choices of this design.
module svard
  import svard_pkg::*;
#(
  parameter int unsigned N_ROWS = svard_pkg::ROWS_PER_BANK,
  localparam int unsigned AW    = $clog2(N_ROWS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_use_dram_meta,
  // ACT commands issued by the memory request scheduler
  input  logic              act_valid,
  input  row_addr_t         act_addr,
  // read data returns with metadata bits (profile source B)
  input  logic              rd_valid,
  input  logic [RANK_W-1:0] rd_rank,
  input  logic [BANK_W-1:0] rd_bank,
  input  bin_t              rd_meta,
  // profile table load / update (profile source A)
  input  logic              prof_we,
  input  row_addr_t         prof_addr,
  input  bin_t              prof_bin,
  // bin -> HCfirst programming
  input  logic              lut_we,
  input  bin_t              lut_bin,
  input  hc_t               lut_hc,
  output logic              ready,
  // to the existing read disturbance defense
  output logic              resp_valid,
  output hc_resp_t          resp
);

  // ---------------------------------------------------------------- source A
  logic [N_BANKS_ALL-1:0] tbl_ready;
  logic [N_BANKS_ALL-1:0] tbl_rd_valid;
  bin_t                   tbl_rd_bin [N_BANKS_ALL];

  logic      act_a;
  logic      act_q_valid;
  row_addr_t act_q;

  assign act_a = act_valid && !cfg_use_dram_meta;

  for (genvar b = 0; b < N_BANKS_ALL; b++) begin : g_bank
    hcfirst_table #(
      .N_ROWS (N_ROWS),
      .INIT_BIN (0)
    ) u_table (
      .clk      (clk),
      .rst_n    (rst_n),
      .rd_en    (act_a && bank_index(act_addr.rank, act_addr.bank) == BIDX_W'(b)),
      .rd_row   (act_addr.row[AW-1:0]),
      .rd_valid (tbl_rd_valid[b]),
      .rd_bin   (tbl_rd_bin[b]),
      .wr_en    (prof_we && bank_index(prof_addr.rank, prof_addr.bank) == BIDX_W'(b)),
      .wr_row   (prof_addr.row[AW-1:0]),
      .wr_bin   (prof_bin),
      .ready    (tbl_ready[b])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_q_valid <= 1'b0;
      act_q       <= '0;
    end else begin
      act_q_valid <= act_a;
      if (act_a) act_q <= act_addr;
    end
  end

  assign ready = &tbl_ready;

  // ---------------------------------------------------------------- source B
  logic      meta_valid;
  row_addr_t meta_addr;
  bin_t      meta_bin;

  meta_bin_capture u_meta (
    .clk       (clk),
    .rst_n     (rst_n),
    .act_valid (act_valid && cfg_use_dram_meta),
    .act_addr  (act_addr),
    .rd_valid  (rd_valid && cfg_use_dram_meta),
    .rd_rank   (rd_rank),
    .rd_bank   (rd_bank),
    .rd_meta   (rd_meta),
    .bin_valid (meta_valid),
    .bin_addr  (meta_addr),
    .bin       (meta_bin)
  );

  // ------------------------------------------------------ bin -> HCfirst
  logic      lk_valid;
  bin_t      lk_bin;
  row_addr_t lk_addr;
  row_addr_t out_addr;

  always_comb begin
    if (cfg_use_dram_meta) begin
      lk_valid = meta_valid;
      lk_bin   = meta_bin;
      lk_addr  = meta_addr;
    end else begin
      lk_valid = act_q_valid;
      lk_bin   = tbl_rd_bin[bank_index(act_q.rank, act_q.bank)];
      lk_addr  = act_q;
    end
  end

  bin_threshold_lut #(
    .TAG_W ($bits(row_addr_t))
  ) u_lut (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (lk_valid),
    .in_bin    (lk_bin),
    .in_tag    (lk_addr),
    .out_valid (resp_valid),
    .out_bin   (resp.bin),
    .out_hc    (resp.hcfirst),
    .out_tag   (out_addr),
    .cfg_we    (lut_we),
    .cfg_bin   (lut_bin),
    .cfg_hc    (lut_hc)
  );

  assign resp.addr = out_addr;

  // ------------------------------------------------------------- checks
  a_act_row_in_range: assert property (
    @(posedge clk) disable iff (!rst_n)
    act_valid |-> 32'(act_addr.row) < N_ROWS);
  a_prof_row_in_range: assert property (
    @(posedge clk) disable iff (!rst_n)
    prof_we |-> 32'(prof_addr.row) < N_ROWS);
  a_table_hit: assert property (
    @(posedge clk) disable iff (!rst_n)
    act_q_valid |-> tbl_rd_valid[bank_index(act_q.rank, act_q.bank)]);

endmodule
