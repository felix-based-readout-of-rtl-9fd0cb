// tb_dec8b10b_word -- self-checking test of the 8b/10b word decoder.
//
// A reference 8b/10b encoder (standard tables, running disparity tracked
// per lane) codes random bytes and all twelve K characters; the decoder must
// return the original byte and K flag with one cycle of latency and no code
// error. Invalid code groups (000000xxxx, xxxxxx1111) must raise code_err.
module tb_dec8b10b_word;
  import felix_pkg::*;

  logic clk = 0, rst = 1;
  logic rx_valid = 0;
  logic [39:0] rx_data = '0;
  logic out_valid;
  link_word_t out_word;
  logic [3:0] code_err;
  int checks = 0, failures = 0;

  dec8b10b_word dut (.*);

  always #2 clk = ~clk;

  // RD- forms, written abcdei / fghj with a / f leftmost
  function automatic logic [5:0] t6(input int x);
    logic [5:0] t [32] = '{6'b100111, 6'b011101, 6'b101101, 6'b110001, 6'b110101, 6'b101001,
                           6'b011001, 6'b111000, 6'b111001, 6'b100101, 6'b010101, 6'b110100,
                           6'b001101, 6'b101100, 6'b011100, 6'b010111, 6'b011011, 6'b100011,
                           6'b010011, 6'b110010, 6'b001011, 6'b101010, 6'b011010, 6'b111010,
                           6'b110011, 6'b100110, 6'b010110, 6'b110110, 6'b001110, 6'b101110,
                           6'b011110, 6'b101011};
    return t[x];
  endfunction
  function automatic logic [3:0] t4(input int y);
    logic [3:0] t [8] = '{4'b1011, 4'b1001, 4'b0101, 4'b1100, 4'b1101, 4'b1010, 4'b0110, 4'b1110};
    return t[y];
  endfunction

  bit rd [4];  // 0 = RD-, 1 = RD+

  // returns the code group as abcdeifghj (a = bit 9)
  function automatic logic [9:0] enc(input logic [7:0] b, input bit k, inout bit r);
    int x = b[4:0], y = b[7:5];
    logic [5:0] c6;
    logic [3:0] c4;
    if (k && x == 28) begin
      logic [3:0] f [8] = '{4'b0100, 4'b1001, 4'b0101, 4'b0011, 4'b0010, 4'b1010, 4'b0110, 4'b1000};
      logic [9:0] w = {6'b001111, f[y]};
      if (r) w = ~w;
      if ($countones(w) != 5) r = ~r;
      return w;
    end
    c6 = t6(x);
    if (r && ($countones(c6) != 3 || x == 7)) c6 = ~c6;
    if ($countones(c6) != 3) r = ~r;
    if (y == 7 && (k || (!r && (x == 17 || x == 18 || x == 20)) || (r && (x == 11 || x == 13 || x == 14))))
      c4 = 4'b0111;
    else
      c4 = t4(y);
    if (r && ($countones(c4) != 2 || y == 3)) c4 = ~c4;
    if ($countones(c4) != 2) r = ~r;
    return {c6, c4};
  endfunction

  // place abcdeifghj into line order (a in bit 0)
  function automatic logic [9:0] line_order(input logic [9:0] w);
    logic [9:0] o;
    for (int i = 0; i < 10; i++) o[i] = w[9-i];
    return o;
  endfunction

  logic [7:0] kchars [12] = '{8'h1C, 8'h3C, 8'h5C, 8'h7C, 8'h9C, 8'hBC, 8'hDC, 8'hFC,
                              8'hF7, 8'hFB, 8'hFD, 8'hFE};

  logic [31:0] exp_d;
  logic [3:0]  exp_k;

  task automatic send_word(input logic [31:0] d, input logic [3:0] k);
    for (int i = 0; i < 4; i++) rx_data[10*i +: 10] = line_order(enc(d[8*i +: 8], k[i], rd[i]));
    rx_valid = 1;
    @(posedge clk); #0;
    rx_valid = 0;
    @(negedge clk);
    checks++;
    if (!out_valid || out_word.data !== d || out_word.k !== k || code_err !== 4'b0) begin
      failures++;
      if (failures < 10)
        $display("FAIL d=%h k=%b got v=%b d=%h k=%b err=%b", d, k, out_valid, out_word.data,
                 out_word.k, code_err);
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4; i++) rd[i] = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    @(negedge clk);
    // every byte value in every lane, both disparities reached naturally
    for (int v = 0; v < 256; v++) send_word({v[7:0], ~v[7:0], v[7:0] ^ 8'h5A, 8'(v * 7)}, 4'b0000);
    // all K characters in every lane
    for (int i = 0; i < 12; i++) begin
      send_word({kchars[i], 8'h00, kchars[(i+3) % 12], 8'hFF}, 4'b1010);
      send_word({8'h11, kchars[i], 8'h22, kchars[(i+5) % 12]}, 4'b0101);
    end
    // random mix
    for (int n = 0; n < 500; n++) begin
      logic [31:0] d;
      logic [3:0]  k;
      d = $urandom;
      k = 4'($urandom);
      for (int i = 0; i < 4; i++) if (k[i]) d[8*i +: 8] = kchars[$urandom % 12];
      send_word(d, k);
    end
    // invalid code groups must be flagged
    rx_data = {10'b1111_000000, 10'b1111_000000, 10'b0000000000, 10'b1111111111};
    rx_valid = 1;
    @(posedge clk); #0; rx_valid = 0; @(negedge clk);
    checks++;
    if (code_err !== 4'b1111) begin failures++; $display("FAIL code_err=%b", code_err); end
    // rx_valid low: out_valid low
    @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("FAIL out_valid without rx_valid"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
