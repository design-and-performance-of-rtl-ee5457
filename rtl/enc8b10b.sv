// enc8b10b: combinational 8b/10b encoder (the standard Widmer-Franaszek code)
// used by the serial interface.
//
// The byte HGFEDCBA is split into EDCBA (5b/6b code abcdei) and HGF (3b/4b
// code fghj). Tables below hold the codes for negative running disparity,
// written with 'a' (resp. 'f') as the leftmost bit. For positive running
// disparity an unbalanced code, and the balanced D.07 / D.x.3 codes, are
// inverted. D.x.7 uses the alternate code A7 where P7 would make a run of
// five equal bits. Control codes K28.y (k = 1, EDCBA = 28) use the K28 6b
// code and invert their balanced 3b/4b code when the disparity after the 6b
// part is negative. Only K28.5 (the comma) is used by the TDC.
//
// Interface: rd_in is the running disparity before the symbol (0 negative,
// 1 positive), rd_out the one after. code[0] is bit 'a', the first bit sent.
module enc8b10b (
  input  logic [7:0] d,
  input  logic       k,
  input  logic       rd_in,
  output logic [9:0] code,
  output logic       rd_out
);
  logic [4:0] x;
  logic [2:0] y;
  logic [5:0] c6;
  logic [3:0] c4;
  logic       rd6;
  logic [9:0] msb_first;

  assign x = d[4:0];
  assign y = d[7:5];

  function automatic logic [5:0] tab6(logic [4:0] v);
    unique case (v)
      5'd0:  return 6'b100111;  5'd1:  return 6'b011101;
      5'd2:  return 6'b101101;  5'd3:  return 6'b110001;
      5'd4:  return 6'b110101;  5'd5:  return 6'b101001;
      5'd6:  return 6'b011001;  5'd7:  return 6'b111000;
      5'd8:  return 6'b111001;  5'd9:  return 6'b100101;
      5'd10: return 6'b010101;  5'd11: return 6'b110100;
      5'd12: return 6'b001101;  5'd13: return 6'b101100;
      5'd14: return 6'b011100;  5'd15: return 6'b010111;
      5'd16: return 6'b011011;  5'd17: return 6'b100011;
      5'd18: return 6'b010011;  5'd19: return 6'b110010;
      5'd20: return 6'b001011;  5'd21: return 6'b101010;
      5'd22: return 6'b011010;  5'd23: return 6'b111010;
      5'd24: return 6'b110011;  5'd25: return 6'b100110;
      5'd26: return 6'b010110;  5'd27: return 6'b110110;
      5'd28: return 6'b001110;  5'd29: return 6'b101110;
      5'd30: return 6'b011110;  default: return 6'b101011;
    endcase
  endfunction

  function automatic logic [3:0] tab4(logic [2:0] v);
    unique case (v)
      3'd0: return 4'b1011;  3'd1: return 4'b1001;
      3'd2: return 4'b0101;  3'd3: return 4'b1100;
      3'd4: return 4'b1101;  3'd5: return 4'b1010;
      3'd6: return 4'b0110;  default: return 4'b1110;
    endcase
  endfunction

  function automatic logic balanced6(logic [5:0] c);
    return $countones(c) == 3;
  endfunction

  function automatic logic balanced4(logic [3:0] c);
    return $countones(c) == 2;
  endfunction

  always_comb begin
    // 5b/6b
    c6 = k ? 6'b001111 : tab6(x);
    if (rd_in && (!balanced6(c6) || (!k && x == 5'd7))) c6 = ~c6;
    rd6 = balanced6(c6) ? rd_in : ~rd_in;
    // 3b/4b
    c4 = tab4(y);
    if (!k && y == 3'd7 &&
        ((!rd6 && (x == 5'd17 || x == 5'd18 || x == 5'd20)) ||
         ( rd6 && (x == 5'd11 || x == 5'd13 || x == 5'd14))))
      c4 = 4'b0111;                                   // A7
    if (k && y == 3'd7) c4 = 4'b0111;
    if (k) begin
      if (balanced4(c4) ? !rd6 : rd6) c4 = ~c4;
    end else if (rd6 && (!balanced4(c4) || y == 3'd3)) begin
      c4 = ~c4;
    end
    rd_out = balanced4(c4) ? rd6 : ~rd6;
    msb_first = {c6, c4};
    for (int i = 0; i < 10; i++) code[i] = msb_first[9-i];
  end
endmodule
