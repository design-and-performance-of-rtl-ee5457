// tb_codec_pkg: reference 8b/10b encoder and a brute-force decoder used by
// the serial-interface and top-level testbenches to read the output stream.
// The encoder is written from the 8b/10b rules independently of the RTL:
// it builds the code as disparity-dependent lookups on the 5b/6b and 3b/4b
// sub-blocks with explicit RD- and RD+ tables.
package tb_codec_pkg;
  // 5b/6b codes, abcdei with a as the leftmost character: RD- and RD+
  const string T6N [32] = '{"100111","011101","101101","110001","110101","101001","011001","111000",
                            "111001","100101","010101","110100","001101","101100","011100","010111",
                            "011011","100011","010011","110010","001011","101010","011010","111010",
                            "110011","100110","010110","110110","001110","101110","011110","101011"};
  const string T6P [32] = '{"011000","100010","010010","110001","001010","101001","011001","000111",
                            "000110","100101","010101","110100","001101","101100","011100","101000",
                            "100100","100011","010011","110010","001011","101010","011010","000101",
                            "001100","100110","010110","001001","001110","010001","100001","010100"};
  const string T4N [8] = '{"1011","1001","0101","1100","1101","1010","0110","1110"};
  const string T4P [8] = '{"0100","1001","0101","0011","0010","1010","0110","0001"};

  function automatic int ones(string s);
    int n = 0;
    foreach (s[i]) if (s[i] == "1") n++;
    return n;
  endfunction

  // returns the 10 code characters; updates rd (0 = negative)
  function automatic string enc(input logic [7:0] d, input logic k, inout logic rd);
    int x = d[4:0], y = d[7:5];
    string s6, s4;
    if (k) s6 = rd ? "110000" : "001111";
    else   s6 = rd ? T6P[x] : T6N[x];
    if (ones(s6) != 3) rd = ~rd;
    if (k) begin
      // K28.5 only
      s4 = rd ? "1010" : "0101";
    end else begin
      s4 = rd ? T4P[y] : T4N[y];
      if (y == 7 && ((!rd && (x == 17 || x == 18 || x == 20)) || (rd && (x == 11 || x == 13 || x == 14))))
        s4 = rd ? "1000" : "0111";
    end
    if (ones(s4) != 2) rd = ~rd;
    return {s6, s4};
  endfunction

  // code[0] = a, first bit on the line
  function automatic logic [9:0] to_bits(string s);
    logic [9:0] b;
    for (int i = 0; i < 10; i++) b[i] = (s[i] == "1");
    return b;
  endfunction

  // decode a symbol given the running disparity; ok = 0 if not a valid code
  function automatic void dec(input logic [9:0] code, inout logic rd,
                              output logic [7:0] d, output logic k, output logic ok);
    ok = 0; d = '0; k = 0;
    for (int v = 0; v < 257; v++) begin
      logic r = rd;
      string s = enc(8'(v == 256 ? 8'hBC : v), v == 256, r);
      if (to_bits(s) == code) begin
        ok = 1; d = (v == 256) ? 8'hBC : 8'(v); k = (v == 256); rd = r;
        return;
      end
    end
  endfunction
endpackage
