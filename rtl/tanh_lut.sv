// tanh_lut: soft bit t = tanh(L/2) from a 7-bit LLR, by table look-up.
//
// The detector turns every bit LLR into the expected value of the bit in
// +-1 form, E[x] = P[x=1] - P[x=0] = tanh(L/2). Using a small table for this
// (with 7 input bits) instead of a division follows the paper. The input
// carries 2 fractional bits (L = llr_i/4, range -16..15.75); the output has
// 8 fractional bits (256 = 1.0). The table holds round(256*tanh(k/8)) for the
// magnitude k = |llr_i| and is mirrored for negative inputs; from k = 28 on
// the value is 256. Purely combinational.
module tanh_lut
  import lama_pkg::*;
(
  input  logic signed [6:0] llr_i,
  output soft_t             t_o
);
  logic [6:0] mag;
  logic [8:0] tmag;

  assign mag = llr_i[6] ? 7'(-llr_i) : 7'(llr_i);

  always_comb begin
    unique case (mag)
      7'd0:  tmag = 9'd0;   7'd1:  tmag = 9'd32;  7'd2:  tmag = 9'd63;  7'd3:  tmag = 9'd92;
      7'd4:  tmag = 9'd118; 7'd5:  tmag = 9'd142; 7'd6:  tmag = 9'd163; 7'd7:  tmag = 9'd180;
      7'd8:  tmag = 9'd195; 7'd9:  tmag = 9'd207; 7'd10: tmag = 9'd217; 7'd11: tmag = 9'd225;
      7'd12: tmag = 9'd232; 7'd13: tmag = 9'd237; 7'd14: tmag = 9'd241; 7'd15: tmag = 9'd244;
      7'd16: tmag = 9'd247; 7'd17: tmag = 9'd249; 7'd18: tmag = 9'd250; 7'd19: tmag = 9'd252;
      7'd20: tmag = 9'd253; 7'd21: tmag = 9'd253; 7'd22: tmag = 9'd254; 7'd23: tmag = 9'd254;
      7'd24: tmag = 9'd255; 7'd25: tmag = 9'd255; 7'd26: tmag = 9'd255; 7'd27: tmag = 9'd255;
      default: tmag = 9'd256;
    endcase
  end

  assign t_o = llr_i[6] ? -soft_t'({1'b0, tmag}) : soft_t'({1'b0, tmag});
endmodule
