// xor_decorrelator: on-line XOR of raw bits SEP trials apart.
//
// Adjacent MTJ trials are correlated, so bits are XORed with bits SEP
// trials away (SEP = 4096, the separation the paper adopts). The stream is
// cut into pairs of blocks of SEP bits. The bits of the first block of a
// pair are stored in a SEP x 1 memory; each bit of the second block is
// XORed with the stored bit at the same position and the result is output.
// Each output bit thus uses two raw bits exactly SEP apart and no raw bit
// is used twice, so the output rate is half the raw rate (10.6 -> 5.3 Mb/s
// in the paper). The paper gives the separation and the halving of the
// rate; the block-pair arrangement is this design's reading of "XOR'ing
// bits" separated by 4096, modelled on the two-halves XOR done offline.
//
// Interface: bit_i is taken when bit_valid is high. With xor_en = 0 every
// raw bit is passed on. A change of xor_en restarts with a fresh first
// block. bit_o/bit_o_valid are registered: the output follows its second
// input bit by one clock.
module xor_decorrelator #(
  parameter int unsigned SEP = 4096
) (
  input  logic clk,
  input  logic rst_n,
  input  logic xor_en,
  input  logic bit_i,
  input  logic bit_valid,
  output logic bit_o,
  output logic bit_o_valid
);

  localparam int unsigned AW = (SEP > 1) ? $clog2(SEP) : 1;

  initial assert (SEP >= 1) else $error("SEP must be >= 1");

  logic          mem [SEP];
  logic [AW-1:0] idx;
  logic          second;   // 0: storing first block, 1: XORing second block
  logic          en_q;
  logic          idx_last;

  assign idx_last = (idx == AW'(SEP - 1));

  // Storage of the first block.
  always_ff @(posedge clk) begin
    if (bit_valid && xor_en && en_q && !second) mem[idx] <= bit_i;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx         <= '0;
      second      <= 1'b0;
      en_q        <= 1'b0;
      bit_o       <= 1'b0;
      bit_o_valid <= 1'b0;
    end else begin
      en_q        <= xor_en;
      bit_o_valid <= 1'b0;
      if (xor_en != en_q) begin
        idx    <= '0;
        second <= 1'b0;
      end else if (bit_valid) begin
        if (!xor_en) begin
          bit_o       <= bit_i;
          bit_o_valid <= 1'b1;
        end else begin
          idx <= idx_last ? '0 : idx + 1'b1;
          if (idx_last) second <= ~second;
          if (second) begin
            bit_o       <= mem[idx] ^ bit_i;
            bit_o_valid <= 1'b1;
          end
        end
      end
    end
  end

endmodule
