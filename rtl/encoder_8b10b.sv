// encoder_8b10b: combinational 8b/10b encoder (standard Widmer-Franaszek code).
//
// data[4:0] (EDCBA) is coded to six bits abcdei and data[7:5] (HGF) to four bits fghj.
// The tables below list each code as used when the running disparity is negative; a
// sub-block with unequal numbers of ones and zeros (and D.7, D.x.3, which are balanced
// but alternate) is complemented when the running disparity is positive, and an
// unbalanced sub-block flips the disparity. D.x.A7 replaces D.x.P7 where P7 would make
// a run of five equal bits. The only control symbol is the K28.5 comma (k=1).
// code[9] is bit a, the first bit on the line. The paper states that the serial
// interface uses 8b/10b; the tables are the standard ones.
module encoder_8b10b (
  input  logic [7:0] data,
  input  logic       k,       // send K28.5 (data ignored)
  input  logic       rd_in,   // running disparity: 0 negative, 1 positive
  output logic [9:0] code,
  output logic       rd_out
);
  logic [5:0] c6;
  logic [3:0] c4;
  logic       alt6;   // balanced code that still alternates (D.7)
  logic       rd_mid;
  logic       a7;

  always_comb begin
    alt6 = 1'b0;
    unique case (data[4:0])
      5'd0:  c6 = 6'b100111;  5'd1:  c6 = 6'b011101;  5'd2:  c6 = 6'b101101;
      5'd3:  c6 = 6'b110001;  5'd4:  c6 = 6'b110101;  5'd5:  c6 = 6'b101001;
      5'd6:  c6 = 6'b011001;  5'd7:  begin c6 = 6'b111000; alt6 = 1'b1; end
      5'd8:  c6 = 6'b111001;  5'd9:  c6 = 6'b100101;  5'd10: c6 = 6'b010101;
      5'd11: c6 = 6'b110100;  5'd12: c6 = 6'b001101;  5'd13: c6 = 6'b101100;
      5'd14: c6 = 6'b011100;  5'd15: c6 = 6'b010111;  5'd16: c6 = 6'b011011;
      5'd17: c6 = 6'b100011;  5'd18: c6 = 6'b010011;  5'd19: c6 = 6'b110010;
      5'd20: c6 = 6'b001011;  5'd21: c6 = 6'b101010;  5'd22: c6 = 6'b011010;
      5'd23: c6 = 6'b111010;  5'd24: c6 = 6'b110011;  5'd25: c6 = 6'b100110;
      5'd26: c6 = 6'b010110;  5'd27: c6 = 6'b110110;  5'd28: c6 = 6'b001110;
      5'd29: c6 = 6'b101110;  5'd30: c6 = 6'b011110;  default: c6 = 6'b101011;
    endcase
    if (rd_in && ($countones(c6) != 3 || alt6)) c6 = ~c6;
    rd_mid = ($countones(c6) != 3) ? ~rd_in : rd_in;

    a7 = (!rd_mid && (data[4:0] == 5'd17 || data[4:0] == 5'd18 || data[4:0] == 5'd20)) ||
         ( rd_mid && (data[4:0] == 5'd11 || data[4:0] == 5'd13 || data[4:0] == 5'd14));
    unique case (data[7:5])
      3'd0: c4 = 4'b1011;
      3'd1: c4 = 4'b1001;
      3'd2: c4 = 4'b0101;
      3'd3: c4 = 4'b1100;
      3'd4: c4 = 4'b1101;
      3'd5: c4 = 4'b1010;
      3'd6: c4 = 4'b0110;
      default: c4 = a7 ? 4'b0111 : 4'b1110;
    endcase
    if (rd_mid && ($countones(c4) != 2 || data[7:5] == 3'd3)) c4 = ~c4;
    rd_out = ($countones(c4) != 2) ? ~rd_mid : rd_mid;
    code   = {c6, c4};

    if (k) begin
      code   = rd_in ? 10'b110000_0101 : 10'b001111_1010;
      rd_out = ~rd_in;
    end
  end
endmodule
