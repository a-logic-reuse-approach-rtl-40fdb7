// hex_string_lut -- hex-string lookup table of the LUT-based array multiplier.
//
// A 4-bit nibble B of the scalar selects one of sixteen 120-bit constant
// strings. String B packs the fifteen products B*1 ... B*15 as bytes, B*k in
// bits [8k-1 : 8k-8], so a later stage finds the product B*A of two nibbles
// by taking byte A-1 of the string (and zero for A = 0). String 0 is all
// zeros.
//
// Interface: sel (4 bits) in, str (120 bits) out. Timing: combinational;
// it synthesises to constant selection logic.
// Some bits are zero in every string (the top bits of the low bytes, e.g.
// byte 0 never exceeds 0F), so synthesis reports those outputs as
// constant; that is a property of the table, not a wiring fault.
//
// The sixteen constants are the ones printed in the paper's lookup table,
// copied digit for digit; each equals the byte packing described above.
module hex_string_lut
  import nibble_mult_pkg::*;
(
  input  nibble_t     sel,
  output hex_string_t str
);

  always_comb begin
    unique case (sel)
      4'h0: str = 120'h0;
      4'h1: str = 120'h0F0E0D0C0B0A090807060504030201;
      4'h2: str = 120'h1E1C1A18161412100E0C0A08060402;
      4'h3: str = 120'h2D2A2724211E1B1815120F0C090603;
      4'h4: str = 120'h3C3834302C2824201C1814100C0804;
      4'h5: str = 120'h4B46413C37322D28231E19140F0A05;
      4'h6: str = 120'h5A544E48423C36302A241E18120C06;
      4'h7: str = 120'h69625B544D463F38312A231C150E07;
      4'h8: str = 120'h787068605850484038302820181008;
      4'h9: str = 120'h877E756C635A51483F362D241B1209;
      4'hA: str = 120'h968C82786E645A50463C32281E140A;
      4'hB: str = 120'hA59A8F84796E63584D42372C21160B;
      4'hC: str = 120'hB4A89C9084786C6054483C3024180C;
      4'hD: str = 120'hC3B6A99C8F8275685B4E4134271A0D;
      4'hE: str = 120'hD2C4B6A89A8C7E70625446382A1C0E;
      4'hF: str = 120'hE1D2C3B4A5968778695A4B3C2D1E0F;
      default: str = '0;
    endcase
  end

endmodule
