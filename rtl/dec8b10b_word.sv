// dec8b10b_word -- link-side ToHost path: 8b/10b decoding of one link word.
//
// The link runs an 8b/10b coded serial protocol at 9.6 Gb/s; the transceiver
// hands over 40 bits per word slot, four 10-bit code groups that are already
// aligned so that code group 0 sits in bits [9:0]. Within a code group bit 0
// is the first bit on the line (the "a" bit of abcdei fghj). Each group is
// decoded with the standard 5b/6b and 3b/4b tables into a byte and a K flag;
// a group that is not in the tables sets code_err for that byte.
//
// Interface: rx_valid qualifies rx_data (the 240 MHz word rate is carried on
// a faster fabric clock as a clock enable). Outputs are registered: one
// cycle of latency, out_valid follows rx_valid.
//
// The paper only states that the link is 8b/10b coded at 9.6 Gb/s. The
// tables are the standard code; running disparity is not checked (only
// invalid code groups are reported) -- a choice of this design.
module dec8b10b_word
  import felix_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        rx_valid,
  input  logic [39:0] rx_data,
  output logic        out_valid,
  output link_word_t  out_word,
  output logic [3:0]  code_err
);

  // decode one 10-bit code group: returns {err, k, byte}
  function automatic logic [9:0] dec_group(input logic [9:0] s);
    logic [5:0] c6;
    logic [3:0] c4;
    logic [4:0] x;
    logic [2:0] y;
    logic       e6, e4, k;
    c6 = {s[0], s[1], s[2], s[3], s[4], s[5]};  // abcdei, a = MSB
    c4 = {s[6], s[7], s[8], s[9]};              // fghj,   f = MSB
    e6 = 1'b0;
    k  = 1'b0;
    unique case (c6)
      6'b100111, 6'b011000: x = 5'd0;
      6'b011101, 6'b100010: x = 5'd1;
      6'b101101, 6'b010010: x = 5'd2;
      6'b110001:            x = 5'd3;
      6'b110101, 6'b001010: x = 5'd4;
      6'b101001:            x = 5'd5;
      6'b011001:            x = 5'd6;
      6'b111000, 6'b000111: x = 5'd7;
      6'b111001, 6'b000110: x = 5'd8;
      6'b100101:            x = 5'd9;
      6'b010101:            x = 5'd10;
      6'b110100:            x = 5'd11;
      6'b001101:            x = 5'd12;
      6'b101100:            x = 5'd13;
      6'b011100:            x = 5'd14;
      6'b010111, 6'b101000: x = 5'd15;
      6'b011011, 6'b100100: x = 5'd16;
      6'b100011:            x = 5'd17;
      6'b010011:            x = 5'd18;
      6'b110010:            x = 5'd19;
      6'b001011:            x = 5'd20;
      6'b101010:            x = 5'd21;
      6'b011010:            x = 5'd22;
      6'b111010, 6'b000101: x = 5'd23;
      6'b110011, 6'b001100: x = 5'd24;
      6'b100110:            x = 5'd25;
      6'b010110:            x = 5'd26;
      6'b110110, 6'b001001: x = 5'd27;
      6'b001110:            x = 5'd28;
      6'b101110, 6'b010001: x = 5'd29;
      6'b011110, 6'b100001: x = 5'd30;
      6'b101011, 6'b010100: x = 5'd31;
      6'b001111:            begin x = 5'd28; k = 1'b1; end
      6'b110000:            begin x = 5'd28; k = 1'b1; c4 = ~c4; end
      default:              begin x = 5'd0;  e6 = 1'b1; end
    endcase
    e4 = 1'b0;
    unique case (c4)
      4'b1011, 4'b0100:                   y = 3'd0;
      4'b1001:                            y = 3'd1;
      4'b0101:                            y = 3'd2;
      4'b1100, 4'b0011:                   y = 3'd3;
      4'b1101, 4'b0010:                   y = 3'd4;
      4'b1010:                            y = 3'd5;
      4'b0110:                            y = 3'd6;
      4'b1110, 4'b0001:                   y = 3'd7;
      4'b0111, 4'b1000: begin
        y = 3'd7;
        // the alternate x.7 form marks K23.7, K27.7, K29.7, K30.7
        if (!k && (x == 5'd23 || x == 5'd27 || x == 5'd29 || x == 5'd30)) k = 1'b1;
      end
      default:                            begin y = 3'd0; e4 = 1'b1; end
    endcase
    return {e6 | e4, k, y, x};
  endfunction

  logic [9:0] dec [4];

  always_comb begin
    for (int i = 0; i < 4; i++) dec[i] = dec_group(rx_data[10*i +: 10]);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_word  <= '0;
      code_err  <= '0;
    end else begin
      out_valid <= rx_valid;
      if (rx_valid) begin
        for (int i = 0; i < 4; i++) begin
          out_word.data[8*i +: 8] <= dec[i][7:0];
          out_word.k[i]           <= dec[i][8];
          code_err[i]             <= dec[i][9];
        end
      end
    end
  end

endmodule
