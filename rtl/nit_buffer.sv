// nit_buffer: double-buffered neighbour index table (NIT) buffer.
//
// An NIT entry is one centroid index and MAX_K neighbour indices (the first k
// of them are used). The buffer has two halves of ENTRIES entries. The DRAM
// side fills one half while the aggregation unit reads the other, so fetching
// the next part of the NIT overlaps aggregation.
// Write side (valid/ready): an entry is taken when wr_valid && wr_ready. A half
// is closed when it is full or when the entry carries wr_last; the writer then
// moves to the other half as soon as that one is empty.
// Read side: rd_avail says a closed half has unread entries; rd_req reads the
// next one, which appears on rd_centroid/rd_nbr with rd_valid one cycle later
// (one entry per cycle). When every entry of a half was read, the half is
// released to the writer.
// Two halves of 128 entries, 64 indices of 12 bits per entry and one entry
// per cycle follow the paper; the handshakes are this design's choice.
module nit_buffer #(
  parameter int ENTRIES = 128,
  parameter int MAX_K   = 64,
  parameter int IDX_W   = 12
) (
  input  logic                clk,
  input  logic                rst_n,
  // DRAM side
  input  logic                wr_valid,
  output logic                wr_ready,
  input  logic                wr_last,
  input  logic [IDX_W-1:0]    wr_centroid,
  input  logic [IDX_W-1:0]    wr_nbr [MAX_K],
  // aggregation side
  output logic                rd_avail,
  input  logic                rd_req,
  output logic                rd_valid,
  output logic [IDX_W-1:0]    rd_centroid,
  output logic [IDX_W-1:0]    rd_nbr [MAX_K]
);
  localparam int EW = IDX_W * (MAX_K + 1);     // 780 bits
  localparam int PW = $clog2(ENTRIES + 1);
  localparam int IW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  logic [EW-1:0] mem [2][ENTRIES];
  logic [1:0]    full;
  logic [PW-1:0] count [2];
  logic          wsel, rsel;
  logic [PW-1:0] wptr, rptr;
  logic [EW-1:0] wword, rword;

  always_comb begin
    wword = '0;
    wword[IDX_W-1:0] = wr_centroid;
    for (int n = 0; n < MAX_K; n++) wword[IDX_W*(n+1) +: IDX_W] = wr_nbr[n];
  end

  assign wr_ready = !full[wsel];
  assign rd_avail = full[rsel] && (rptr < count[rsel]);

  // memory arrays (one SRAM per half)
  always_ff @(posedge clk) begin
    if (wr_valid && wr_ready) mem[wsel][IW'(wptr)] <= wword;
    if (rd_req && rd_avail)   rword <= mem[rsel][IW'(rptr)];
  end

  always_comb begin
    rd_centroid = rword[IDX_W-1:0];
    for (int n = 0; n < MAX_K; n++) rd_nbr[n] = rword[IDX_W*(n+1) +: IDX_W];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      full     <= '0;
      count[0] <= '0;
      count[1] <= '0;
      wsel     <= 1'b0;
      rsel     <= 1'b0;
      wptr     <= '0;
      rptr     <= '0;
      rd_valid <= 1'b0;
    end else begin
      rd_valid <= rd_req && rd_avail;
      if (wr_valid && wr_ready) begin
        if (wr_last || int'(wptr) == ENTRIES - 1) begin
          full[wsel]  <= 1'b1;
          count[wsel] <= wptr + 1'b1;
          wsel        <= !wsel;
          wptr        <= '0;
        end else begin
          wptr <= wptr + 1'b1;
        end
      end
      if (rd_req && rd_avail) begin
        if (rptr + 1'b1 == count[rsel]) begin
          full[rsel] <= 1'b0;
          rsel       <= !rsel;
          rptr       <= '0;
        end else begin
          rptr <= rptr + 1'b1;
        end
      end
    end
  end

  a_no_read_when_empty: assert property (@(posedge clk) disable iff (!rst_n)
                                         rd_req |-> rd_avail);
endmodule
