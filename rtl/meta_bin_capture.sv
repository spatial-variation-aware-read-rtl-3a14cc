// meta_bin_capture -- takes a row's vulnerability bin from DRAM metadata.
//
// Second way of obtaining the profile: instead of a table in the memory
// controller, each DRAM row stores its own BIN_W-bit bin id in spare data
// integrity (metadata) bits, which come back in parallel with read data. The
// bin of an activated row is therefore known with the first read that follows
// the activation.
//
// The block keeps, per bank, the address of the open row and a `pending`
// flag. An ACT to a bank records the row and sets `pending`. The first read
// return for that bank while `pending` is set emits the metadata bits as the
// row's bin (bin_valid) and clears `pending`; later reads of the same open
// row are ignored. If an ACT and a read return of the same bank meet in one
// cycle, the ACT wins (the read belongs to the row that was closed before).
//
// Timing: read return in cycle t -> bin_valid/bin_addr/bin in cycle t+1.
//
// The paper gives the idea (4 bits per row in the integrity bits, fetched with
// the first read, no extra latency); the per-bank pending register and the
// interface are choices of this design. Writing the bins into DRAM is done by
// ordinary writes and is outside this block.
module meta_bin_capture
  import svard_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // ACT commands issued by the scheduler
  input  logic                 act_valid,
  input  row_addr_t            act_addr,
  // read data returns: bank of the read and the metadata bits
  input  logic                 rd_valid,
  input  logic [RANK_W-1:0]    rd_rank,
  input  logic [BANK_W-1:0]    rd_bank,
  input  bin_t                 rd_meta,
  // bin of an activated row
  output logic                 bin_valid,
  output row_addr_t            bin_addr,
  output bin_t                 bin
);

  logic [N_BANKS_ALL-1:0] pending;
  logic [ROW_W-1:0]       open_row [N_BANKS_ALL];

  logic [BIDX_W-1:0] act_b, rd_b;
  logic              capture;

  assign act_b   = bank_index(act_addr.rank, act_addr.bank);
  assign rd_b    = {rd_rank, rd_bank};
  assign capture = rd_valid && pending[rd_b] && !(act_valid && act_b == rd_b);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending <= '0;
      for (int unsigned b = 0; b < N_BANKS_ALL; b++) open_row[b] <= '0;
    end else begin
      if (capture) pending[rd_b] <= 1'b0;
      if (act_valid) begin
        pending[act_b]  <= 1'b1;
        open_row[act_b] <= act_addr.row;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bin_valid <= 1'b0;
      bin_addr  <= '0;
      bin       <= '0;
    end else begin
      bin_valid <= capture;
      if (capture) begin
        bin_addr <= '{rank: rd_rank, bank: rd_bank, row: open_row[rd_b]};
        bin      <= rd_meta;
      end
    end
  end

endmodule
