// reduction_max: the (NB+1)-input maximum of the aggregation unit.
//
// Takes the NB words the PFT banks produced in a cycle, of which din_en marks
// those that belong to the current round, plus the partial maximum fed back
// from the top shift register (fb, used when fb_en). It returns the signed
// maximum of all enabled inputs, or the most negative value if none is
// enabled. Purely combinational: disabled inputs are replaced by the most
// negative value, the NB bank words go through a balanced tree of two-input
// maximum cells (one generate level per tree level), and a last cell merges
// the feedback word.
// The unit (33 inputs for 32 banks) follows the paper; signed comparison is
// this design's choice, as the paper gives no number format.
module reduction_max #(
  parameter int NB     = 32,
  parameter int WORD_W = 32
) (
  input  logic [WORD_W-1:0] din [NB],
  input  logic [NB-1:0]     din_en,
  input  logic [WORD_W-1:0] fb,
  input  logic              fb_en,
  output logic [WORD_W-1:0] max_out
);
  localparam int LV = $clog2(NB);
  localparam int P2 = 1 << LV;
  localparam logic signed [WORD_W-1:0] NEG = {1'b1, {(WORD_W-1){1'b0}}};

  // level l has P2 >> l nodes, stored at offset P2*2 - (P2*2 >> l)
  logic signed [WORD_W-1:0] node [2*P2-1];

  for (genvar i = 0; i < P2; i++) begin : g_leaf
    if (i < NB) begin : g_in
      assign node[i] = din_en[i] ? $signed(din[i]) : NEG;
    end else begin : g_pad
      assign node[i] = NEG;
    end
  end

  for (genvar l = 1; l <= LV; l++) begin : g_lvl
    localparam int IN_OFF  = 2 * P2 - ((2 * P2) >> (l - 1));
    localparam int OUT_OFF = 2 * P2 - ((2 * P2) >> l);
    for (genvar i = 0; i < (P2 >> l); i++) begin : g_cell
      assign node[OUT_OFF + i] = (node[IN_OFF + 2*i] > node[IN_OFF + 2*i + 1])
                                 ? node[IN_OFF + 2*i] : node[IN_OFF + 2*i + 1];
    end
  end

  logic signed [WORD_W-1:0] fbv;
  assign fbv     = fb_en ? $signed(fb) : NEG;
  assign max_out = (fbv > node[2*P2-2]) ? fbv : node[2*P2-2];
endmodule
