// bin_threshold_lut -- vulnerability bin id to HCfirst translation.
//
// A register file of N_BINS entries, each the HCfirst value of one
// vulnerability bin. A lookup (in_valid, in_bin) returns that bin's HCfirst one
// clock later, together with an opaque tag (the activated row's address) that
// travels alongside. Software programs the entries through the cfg port: the
// profile of a DRAM module is a list of row classes, and scaling it to a
// chip generation with a lower worst-case HCfirst (every value multiplied by
// target / minimum) only rewrites these 16 registers, not the per-row table.
//
// Reset values: bin i holds the i-th characterized hammer count
// (1K, 2K, 4K, 8K, 12K, 16K, 24K, 32K, 40K, 48K, 56K, 64K, 96K, 128K); the two
// spare codes 14 and 15 hold the weakest value, 1K.
//
// Timing: in_valid in cycle t -> out_valid/out_hc/out_bin/out_tag in cycle t+1.
// A cfg write and a lookup of the same bin in one cycle return the old value.
//
// The bin-to-HCfirst mapping and the scaling rule follow the paper; keeping
// the mapping in programmable registers, the reset values and the one-cycle
// latency are choices of this design.
module bin_threshold_lut
  import svard_pkg::*;
#(
  parameter int unsigned TAG_W = $bits(row_addr_t)
) (
  input  logic             clk,
  input  logic             rst_n,
  // lookup
  input  logic             in_valid,
  input  bin_t             in_bin,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output bin_t             out_bin,
  output hc_t              out_hc,
  output logic [TAG_W-1:0] out_tag,
  // programming
  input  logic             cfg_we,
  input  bin_t             cfg_bin,
  input  hc_t              cfg_hc
);

  hc_t hc_tab [N_BINS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned b = 0; b < N_BINS; b++) hc_tab[b] <= default_hc(b);
    end else if (cfg_we) begin
      hc_tab[cfg_bin] <= cfg_hc;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_bin   <= '0;
      out_hc    <= '0;
      out_tag   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_bin <= in_bin;
        out_hc  <= hc_tab[in_bin];
        out_tag <= in_tag;
      end
    end
  end

  // An HCfirst of zero would make every activation look like an attack.
  a_nonzero_hc: assert property (
    @(posedge clk) disable iff (!rst_n) cfg_we |-> cfg_hc != '0);

endmodule
