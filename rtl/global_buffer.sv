// global_buffer: the NPU's on-chip scratchpad (weights, layer inputs and
// outputs, the point feature table and aggregation results).
//
// BANKS single-ported banks of BANK_LINES lines; a line is LINE_WORDS words.
// The line address is split into a bank number (high bits, so each bank holds
// one contiguous 128 KB range) and a line within the bank. One access per
// cycle: a write stores the words selected by wmask; a read returns the line in
// rdata one cycle later (rdata holds its value until the next read).
// Capacity (1.5 MB) and bank size (128 KB) follow the paper; the single port,
// the 64-byte line and the word write mask are this design's choice. The arrays
// stand for compiled SRAM macros.
module global_buffer #(
  parameter int BANKS      = 12,
  parameter int BANK_LINES = 2048,
  parameter int LINE_WORDS = 16,
  parameter int WORD_W     = 32,
  localparam int BANK_AW   = $clog2(BANK_LINES),
  localparam int AW        = $clog2(BANKS * BANK_LINES)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic                  we,
  input  logic [LINE_WORDS-1:0] wmask,
  input  logic [AW-1:0]         addr,
  input  logic [WORD_W-1:0]     wdata [LINE_WORDS],
  output logic [WORD_W-1:0]     rdata [LINE_WORDS]
);
  localparam int BSEL_W = (BANKS > 1) ? $clog2(BANKS) : 1;

  logic [BSEL_W-1:0]  bank;
  logic [BANK_AW-1:0] row;
  logic [BSEL_W-1:0]  bank_q;
  logic [WORD_W-1:0]  bank_rd [BANKS][LINE_WORDS];

  always_comb begin
    bank = BSEL_W'(addr / AW'(BANK_LINES));
    row  = BANK_AW'(addr % AW'(BANK_LINES));
  end

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    logic [WORD_W-1:0] mem [BANK_LINES][LINE_WORDS];
    always_ff @(posedge clk) begin
      if (en && bank == BSEL_W'(b)) begin
        if (we) begin
          for (int w = 0; w < LINE_WORDS; w++)
            if (wmask[w]) mem[row][w] <= wdata[w];
        end else begin
          bank_rd[b] <= mem[row];
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      bank_q <= '0;
    end else begin
      if (en && !we) bank_q <= bank;
    end
  end

  always_comb rdata = bank_rd[bank_q];

  // an address past the last bank is a software error
  a_addr_range: assert property (@(posedge clk) disable iff (!rst_n)
                                 en |-> (int'(addr) < BANKS * BANK_LINES));
endmodule
