// hcfirst_table -- per-bank vulnerability bin table (one DRAM bank).
//
// Holds one BIN_W-bit vulnerability bin id for each of the N_ROWS rows of a
// DRAM bank. The memory controller reads it with the row address of every
// ACT it issues; the bin id comes out one clock later, which is far shorter
// than the row activation it overlaps with (tRCD, about 14 ns). A write port
// loads the profile after characterization and lets it be updated in the
// field (rows can weaken with aging).
//
// After reset the table sweeps every row to INIT_BIN, one row per clock, and
// only then raises `ready`. INIT_BIN defaults to the weakest bin, so a row
// whose profile was never loaded is protected as conservatively as a defense
// without Svard would protect it. While the sweep runs, lookups return
// INIT_BIN and writes are not accepted (an assertion flags them).
//
// Timing: rd_en in cycle t -> rd_valid/rd_bin in cycle t+1. Read and write of
// the same row in one cycle return the old bin (read-first).
//
// The paper gives the table's shape (4 bits x N_R rows per bank, in the
// memory controller, indexed by the activated row address); the reset sweep,
// the one-cycle read and the write port are choices of this design.
module hcfirst_table
  import svard_pkg::*;
#(
  parameter int unsigned N_ROWS   = svard_pkg::ROWS_PER_BANK,
  parameter int unsigned INIT_BIN = 0,
  localparam int unsigned AW      = $clog2(N_ROWS)
) (
  input  logic             clk,
  input  logic             rst_n,
  // lookup on row activation
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_row,
  output logic             rd_valid,
  output logic [BIN_W-1:0] rd_bin,
  // profile load / update
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_row,
  input  logic [BIN_W-1:0] wr_bin,
  // high once the reset sweep has finished
  output logic             ready
);

  logic [BIN_W-1:0] mem [N_ROWS];

  logic [AW-1:0] sweep_row;
  logic          sweeping;
  logic          rd_during_sweep;
  logic [BIN_W-1:0] rd_q;

  // write port shared by the reset sweep and the profile load
  logic             we;
  logic [AW-1:0]    wa;
  logic [BIN_W-1:0] wd;

  always_comb begin
    if (sweeping) begin
      we = 1'b1;
      wa = sweep_row;
      wd = BIN_W'(INIT_BIN);
    end else begin
      we = wr_en;
      wa = wr_row;
      wd = wr_bin;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sweeping  <= 1'b1;
      sweep_row <= '0;
    end else if (sweeping) begin
      sweep_row <= sweep_row + 1'b1;
      if (sweep_row == AW'(N_ROWS - 1)) sweeping <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (we) mem[wa] <= wd;
    if (rd_en) rd_q <= mem[rd_row];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid        <= 1'b0;
      rd_during_sweep <= 1'b0;
    end else begin
      rd_valid        <= rd_en;
      rd_during_sweep <= sweeping;
    end
  end

  assign rd_bin = rd_during_sweep ? BIN_W'(INIT_BIN) : rd_q;
  assign ready  = ~sweeping;

  // A profile write while the sweep runs would be lost.
  a_no_write_before_ready: assert property (
    @(posedge clk) disable iff (!rst_n) wr_en |-> !sweeping);

endmodule
