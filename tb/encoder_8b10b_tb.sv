// encoder_8b10b_tb: checks the encoder against published code words (D.0.0, D.21.5,
// D.17.7 in alternate form, D.7.x, K28.5 in both disparities) and against the code's
// defining properties on a long random stream: every symbol carries 4, 5 or 6 ones and
// moves the running disparity as reported, the running digital sum stays in bounds,
// no run is longer than five equal bits, the comma pattern 0011111/1100000 never shows
// at any bit position of a data stream, and the 256 codes of each disparity are all
// different (so the stream can be decoded).
`timescale 1ns/1ps
module encoder_8b10b_tb;
  logic [7:0] data;
  logic k, rd_in, rd_out;
  logic [9:0] code;
  int checks = 0, failures = 0;

  encoder_8b10b dut (.data, .k, .rd_in, .code, .rd_out);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic known(logic [7:0] d, logic kk, logic rd, logic [9:0] exp, logic exp_rd);
    data = d; k = kk; rd_in = rd; #1;
    checks++;
    if (code !== exp || rd_out !== exp_rd) begin
      failures++;
      $display("%s%0d.%0d rd%s: %b rd=%b expected %b rd=%b", kk ? "K" : "D", d[4:0], d[7:5],
               rd ? "+" : "-", code, rd_out, exp, exp_rd);
    end
  endtask

  initial begin
    logic [9:0] seen [2][256];
    logic [63:0] stream;
    int rds, run, ones;
    logic last, rd;
    known(8'h00, 0, 0, 10'b100111_0100, 0);   // D.0.0
    known(8'h00, 0, 1, 10'b011000_1011, 1);   // D.0.0 RD+
    known(8'hB5, 0, 0, 10'b101010_1010, 0);   // D.21.5
    known(8'hF1, 0, 0, 10'b100011_0111, 1);   // D.17.7 (A7)
    known(8'hEB, 0, 1, 10'b110100_1000, 0);   // D.11.7 RD+ (A7)
    known(8'h07, 0, 0, 10'b111000_1011, 1);   // D.7.0
    known(8'h03, 0, 0, 10'b110001_1011, 1);   // D.3.0
    known(8'hBC, 1, 0, 10'b001111_1010, 1);   // K28.5 RD-
    known(8'hBC, 1, 1, 10'b110000_0101, 0);   // K28.5 RD+
    // uniqueness of the code tables
    for (int r = 0; r < 2; r++)
      for (int d = 0; d < 256; d++) begin
        data = 8'(d); k = 0; rd_in = r[0]; #1;
        seen[r][d] = code;
        for (int e = 0; e < d; e++) begin
          if (seen[r][e] == code) begin
            checks++; failures++; $display("codes of %0d and %0d equal", d, e);
          end
        end
      end
    // random stream
    rd = 0; rds = -1; run = 0;   // negative disparity = digital sum -1 last = 0; stream = '0;
    for (int n = 0; n < 20000; n++) begin
      data = 8'($urandom); k = 0; rd_in = rd; #1;
      ones = $countones(code);
      checks++;
      if (!(ones inside {4, 5, 6}) || (ones != 5) != (rd_out != rd_in) ||
          (ones == 6 && rd_in) || (ones == 4 && !rd_in)) begin
        failures++;
        if (failures < 10) $display("disparity error data=%h rd=%b code=%b", data, rd_in, code);
      end
      for (int b = 9; b >= 0; b--) begin
        rds += code[b] ? 1 : -1;
        if (code[b] == last) run++; else run = 1;
        last = code[b];
        stream = {stream[62:0], code[b]};
        checks++;
        if (run > 5 || rds > 3 || rds < -3) begin
          failures++;
          if (failures < 10) $display("run %0d rds %0d at symbol %0d", run, rds, n);
        end
        if (n > 1 && (stream[6:0] == 7'b0011111 || stream[6:0] == 7'b1100000)) begin
          checks++; failures++;
          if (failures < 10) $display("comma in data stream at symbol %0d", n);
        end
      end
      rd = rd_out;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
