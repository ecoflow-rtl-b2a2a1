// global_buffer: the accelerator's banked on-chip SRAM buffer.
//
// Holds ifmaps, errors and results between processing passes (filters are
// streamed past it, straight from DRAM to the PEs).  The storage is BANKS
// banks of BANK_WORDS 16-bit words; the word address selects the bank by
// its upper part (bank = addr / BANK_WORDS) and the word inside the bank by
// the rest, so consecutive addresses stay in one bank.  Each bank is a
// separate 1-read/1-write array, so the read port and the write port work
// in the same cycle.  Addresses beyond the last bank are ignored on writes
// and read as zero.
//
// Timing: a read issued with rd_en in cycle t returns rd_data in cycle t+1
// (rd_data holds until the next read).  A write is done at the clock edge.
// A read of the word written in the same cycle returns the old value.
//
// From the paper: 108 KB in 27 banks (27 x 2048 x 16 b = 108 KB).  Own
// choices: 16-bit word, one read and one write port, the bank mapping.
module global_buffer
  import ecoflow_pkg::*;
#(
  parameter int unsigned BANKS      = 27,
  parameter int unsigned BANK_WORDS = 2048
) (
  input  logic     clk,
  input  logic     rd_en,
  input  gb_addr_t rd_addr,
  output data_t    rd_data,
  input  logic     wr_en,
  input  gb_addr_t wr_addr,
  input  data_t    wr_data
);
  localparam int unsigned OW = $clog2(BANK_WORDS);

  logic [GB_AW-1:0] rd_bank, wr_bank;
  logic [OW-1:0]    rd_off, wr_off;
  data_t            bank_q [BANKS];
  logic [GB_AW-1:0] rd_bank_q;

  assign rd_bank = rd_addr / GB_AW'(BANK_WORDS);
  assign wr_bank = wr_addr / GB_AW'(BANK_WORDS);
  assign rd_off  = OW'(rd_addr % GB_AW'(BANK_WORDS));
  assign wr_off  = OW'(wr_addr % GB_AW'(BANK_WORDS));

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    data_t mem [BANK_WORDS];
    always_ff @(posedge clk) begin
      if (wr_en && wr_bank == GB_AW'(b)) mem[wr_off] <= wr_data;
      if (rd_en && rd_bank == GB_AW'(b)) bank_q[b] <= mem[rd_off];
    end
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_bank_q <= rd_bank;
  end

  always_comb begin
    rd_data = '0;
    for (int b = 0; b < BANKS; b++)
      if (rd_bank_q == GB_AW'(b)) rd_data = bank_q[b];
  end
endmodule
