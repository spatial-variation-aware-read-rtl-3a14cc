// svard_pkg -- shared constants and types of the Svard vulnerability-aware
// threshold unit.
//
// Svard sits in the memory controller beside an existing read disturbance
// (RowHammer/RowPress) defense. Every DRAM row carries a small vulnerability
// bin id; when the row is activated Svard turns that id into the row's own
// HCfirst (the hammer count at which the row shows its first bitflip) and
// hands it to the defense, so the defense is only as aggressive as that row
// needs.
//
// Organization (follows the evaluated system): one channel, 2 ranks, 4 bank
// groups x 4 banks = 16 banks per rank, 128K rows per bank. The bin id is
// 4 bits wide. The 14 hammer counts at which rows were characterized
// (1K ... 128K, K = 1024) define the bins; bin i stands for the i-th of these
// counts in ascending order, so bin 0 is the weakest row class. That ordering,
// the use of the two spare codes (14, 15) and the 18-bit HCfirst width are
// choices of this design.
package svard_pkg;

  // ---- organization -------------------------------------------------------
  localparam int unsigned N_RANKS     = 2;        // ranks per channel
  localparam int unsigned N_BANKS     = 16;       // banks per rank (4 BG x 4)
  localparam int unsigned ROWS_PER_BANK = 131072; // rows per bank (128K)
  localparam int unsigned N_BANKS_ALL = N_RANKS * N_BANKS;

  localparam int unsigned RANK_W = $clog2(N_RANKS);
  localparam int unsigned BANK_W = $clog2(N_BANKS);
  localparam int unsigned ROW_W  = $clog2(ROWS_PER_BANK);
  localparam int unsigned BIDX_W = $clog2(N_BANKS_ALL);  // flat {rank,bank}

  // ---- vulnerability profile ----------------------------------------------
  localparam int unsigned BIN_W  = 4;              // bin id width per row
  localparam int unsigned N_BINS = 1 << BIN_W;     // 16 codes
  localparam int unsigned N_HC   = 14;             // characterized hammer counts
  localparam int unsigned HC_W   = 18;             // holds 128K = 2^17

  typedef logic [BIN_W-1:0] bin_t;
  typedef logic [HC_W-1:0]  hc_t;

  // Hammer counts used for characterization, ascending, in units of 1K=1024.
  localparam int unsigned HAMMER_K [N_HC] =
    '{1, 2, 4, 8, 12, 16, 24, 32, 40, 48, 56, 64, 96, 128};

  // Power-on HCfirst of a bin: the characterized hammer count for bins 0..13;
  // the two spare codes fall back to the weakest class (bin 0).
  function automatic hc_t default_hc(input int unsigned bin);
    if (bin < N_HC) return hc_t'(HAMMER_K[bin] * 1024);
    else            return hc_t'(HAMMER_K[0] * 1024);
  endfunction

  // ---- address of an activated row ----------------------------------------
  typedef struct packed {
    logic [RANK_W-1:0] rank;
    logic [BANK_W-1:0] bank;
    logic [ROW_W-1:0]  row;
  } row_addr_t;

  function automatic logic [BIDX_W-1:0] bank_index(input logic [RANK_W-1:0] rank,
                                                   input logic [BANK_W-1:0] bank);
    return {rank, bank};
  endfunction

  // ---- what Svard hands to the read disturbance defense -------------------
  typedef struct packed {
    row_addr_t addr;    // activated row
    bin_t      bin;     // its vulnerability bin
    hc_t       hcfirst; // its HCfirst, to derive the defense's threshold
  } hc_resp_t;

endpackage
