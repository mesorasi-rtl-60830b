// pft_buffer: point feature table buffer of the aggregation unit.
//
// NB independently addressed, single-ported banks of BANK_WORDS words. Each
// bank has its own address, so NB different words (one per bank) are read in a
// cycle; rd_data[b] is the word of bank b one cycle after rd_en[b]. There is no
// output crossbar that would route a bank's word back to the requesting
// neighbour slot: the words only feed a maximum, which does not care about the
// order of its inputs. The address routing to banks is done by the AGU.
// The write side fills the buffer from the global buffer, up to one word per
// bank per cycle. A bank cannot read and write in the same cycle (assertion).
// 32 banks of 2 KB (512 words of 4 bytes) follow the paper; the arrays stand
// for compiled SRAM macros.
module pft_buffer #(
  parameter int NB         = 32,
  parameter int BANK_WORDS = 512,
  parameter int WORD_W     = 32,
  localparam int AW        = $clog2(BANK_WORDS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NB-1:0]     rd_en,
  input  logic [AW-1:0]     rd_addr [NB],
  output logic [WORD_W-1:0] rd_data [NB],
  input  logic [NB-1:0]     wr_en,
  input  logic [AW-1:0]     wr_addr [NB],
  input  logic [WORD_W-1:0] wr_data [NB]
);
  for (genvar b = 0; b < NB; b++) begin : g_bank
    logic [WORD_W-1:0] mem [BANK_WORDS];
    always_ff @(posedge clk) begin
      if (wr_en[b])      mem[wr_addr[b]] <= wr_data[b];
      else if (rd_en[b]) rd_data[b] <= mem[rd_addr[b]];
    end
  end

  a_single_port: assert property (@(posedge clk) disable iff (!rst_n) (rd_en & wr_en) == '0);
endmodule
