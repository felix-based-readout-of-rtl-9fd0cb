// tb_wib_pkg -- reference models shared by the testbenches.
//
// ref_frame() builds the expected 120-word WIB frame for a timestamp,
// convert count and identifiers, written directly from the frame layout of
// felix_pkg (header fields, 12-bit ADC values packed back to back, CRC-20 by
// bitwise polynomial division of the payload). enc_word() is a standard
// 8b/10b encoder with per-lane running disparity, producing transceiver
// words in line order (bit 0 of each 10-bit group sent first).
package tb_wib_pkg;
  import felix_pkg::*;

  typedef link_word_t frame_t [FRAME_WORDS];

  // CRC-20, polynomial 0x8359F, seed all ones, MSB first
  function automatic logic [19:0] ref_crc(input logic [31:0] p [PAYLOAD_WORDS]);
    logic [20:0] r;   // remainder register including the x^20 term
    r = {1'b0, 20'hFFFFF};
    for (int w = 0; w < PAYLOAD_WORDS; w++)
      for (int b = 31; b >= 0; b--) begin
        r = {r[19:0], 1'b0};
        r[20] = r[20] ^ p[w][b];
        if (r[20]) r = r ^ {1'b1, 20'h8359F};
      end
    return r[19:0];
  endfunction

  function automatic logic [11:0] ref_adc(input logic [62:0] ts, input int ch);
    return 12'((ts & 63'hFFF) + 13 * ch);
  endfunction

  function automatic frame_t ref_frame(input logic [62:0] ts, input logic [15:0] conv,
                                       input logic [2:0] fiber, input logic [4:0] slot,
                                       input logic [7:0] crate);
    frame_t f;
    logic [31:0] p [PAYLOAD_WORDS];
    p[0] = {8'h00, crate, slot, fiber, 8'h01};
    p[1] = 32'h0;
    p[2] = ts[31:0];
    p[3] = {1'b0, ts[62:32]};
    for (int b = 0; b < 4; b++) begin
      logic [767:0] v;
      int base;
      base = 4 + 28 * b;
      p[base] = {16'h0, conv};
      p[base+1] = 0; p[base+2] = 0; p[base+3] = 0;
      for (int j = 0; j < 64; j++) v[12*j +: 12] = ref_adc(ts, 64 * b + j);
      for (int w = 0; w < 24; w++) p[base + 4 + w] = v[32*w +: 32];
    end
    f[0] = '{k: 4'b0001, data: 32'h0000_003C};
    for (int i = 0; i < PAYLOAD_WORDS; i++) f[1+i] = '{k: 4'b0, data: p[i]};
    f[117] = '{k: 4'b0, data: {12'h0, ref_crc(p)}};
    f[118] = '{k: 4'b0001, data: 32'h0000_00DC};
    f[119] = '{k: 4'b0001, data: 32'h0000_00BC};
    return f;
  endfunction

  // ---- 8b/10b encoder --------------------------------------------------------
  function automatic logic [9:0] enc_group(input logic [7:0] b, input bit k, inout bit r);
    logic [5:0] t6 [32] = '{6'b100111, 6'b011101, 6'b101101, 6'b110001, 6'b110101, 6'b101001,
                            6'b011001, 6'b111000, 6'b111001, 6'b100101, 6'b010101, 6'b110100,
                            6'b001101, 6'b101100, 6'b011100, 6'b010111, 6'b011011, 6'b100011,
                            6'b010011, 6'b110010, 6'b001011, 6'b101010, 6'b011010, 6'b111010,
                            6'b110011, 6'b100110, 6'b010110, 6'b110110, 6'b001110, 6'b101110,
                            6'b011110, 6'b101011};
    logic [3:0] t4 [8] = '{4'b1011, 4'b1001, 4'b0101, 4'b1100, 4'b1101, 4'b1010, 4'b0110, 4'b1110};
    logic [3:0] k28 [8] = '{4'b0100, 4'b1001, 4'b0101, 4'b0011, 4'b0010, 4'b1010, 4'b0110, 4'b1000};
    int x = b[4:0], y = b[7:5];
    logic [5:0] c6;
    logic [3:0] c4;
    logic [9:0] w, o;
    if (k && x == 28) begin
      w = {6'b001111, k28[y]};
      if (r) w = ~w;
      if ($countones(w) != 5) r = ~r;
    end else begin
      c6 = t6[x];
      if (r && ($countones(c6) != 3 || x == 7)) c6 = ~c6;
      if ($countones(c6) != 3) r = ~r;
      if (y == 7 && (k || (!r && (x == 17 || x == 18 || x == 20)) || (r && (x == 11 || x == 13 || x == 14))))
        c4 = 4'b0111;
      else
        c4 = t4[y];
      if (r && ($countones(c4) != 2 || y == 3)) c4 = ~c4;
      if ($countones(c4) != 2) r = ~r;
      w = {c6, c4};
    end
    for (int i = 0; i < 10; i++) o[i] = w[9-i];
    return o;
  endfunction

  class link_encoder;
    bit rd [4];
    function new();
      foreach (rd[i]) rd[i] = 0;
    endfunction
    function logic [39:0] encode(input link_word_t w);
      logic [39:0] o;
      for (int i = 0; i < 4; i++) o[10*i +: 10] = enc_group(w.data[8*i +: 8], w.k[i], rd[i]);
      return o;
    endfunction
  endclass

endpackage
