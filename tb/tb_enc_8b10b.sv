// tb_enc_8b10b: self-checking test of the 8B/10B encoder.
//
// Checks a set of code words copied from the standard 8B/10B tables, then,
// for every data byte and both disparities, the code rules that hold for any
// correct encoder: the symbol has 4, 5 or 6 ones, its disparity moves the
// running disparity the right way, rd_out matches the ones count, and a long
// stream of symbols never has more than five equal bits in a row. The
// standard control characters are checked the same way.
module tb_enc_8b10b;
  logic [7:0] data;
  logic       is_k, rd_in, rd_out;
  logic [9:0] code;
  int checks = 0, failures = 0;

  enc_8b10b dut (.data, .is_k, .rd_in, .code, .rd_out);

  task automatic expect_code(input logic [7:0] d, input logic k, input logic rd,
                             input logic [9:0] exp);
    data = d; is_k = k; rd_in = rd; #1;
    checks++;
    if (code !== exp) begin
      failures++;
      $display("FAIL %s%0d.%0d rd%s: got %b expected %b", k ? "K" : "D", d[4:0], d[7:5],
               rd ? "+" : "-", code, exp);
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int run, ones;
    logic last_bit, rd;
    logic [7:0] kchars [5];
    kchars = '{8'h1C, 8'hBC, 8'hF7, 8'hFB, 8'hFD};
    // Reference code words from the standard tables {abcdei fghj}.
    expect_code(8'hBC, 1, 0, 10'b001111_1010);  // K28.5
    expect_code(8'hBC, 1, 1, 10'b110000_0101);
    expect_code(8'h3C, 1, 0, 10'b001111_1001);  // K28.1
    expect_code(8'h3C, 1, 1, 10'b110000_0110);
    expect_code(8'hFB, 1, 0, 10'b110110_1000);  // K27.7
    expect_code(8'hFD, 1, 1, 10'b010001_0111);  // K29.7
    expect_code(8'h00, 0, 0, 10'b100111_0100);  // D0.0
    expect_code(8'h00, 0, 1, 10'b011000_1011);
    expect_code(8'hB5, 0, 0, 10'b101010_1010);  // D21.5
    expect_code(8'h4A, 0, 1, 10'b010101_0101);  // D10.2
    expect_code(8'h07, 0, 0, 10'b111000_1011);  // D7.0
    expect_code(8'h07, 0, 1, 10'b000111_0100);
    expect_code(8'hF1, 0, 0, 10'b100011_0111);  // D17.7 alternate
    expect_code(8'hEB, 0, 1, 10'b110100_1000);  // D11.7 alternate
    expect_code(8'hE3, 0, 0, 10'b110001_1110);  // D3.7 primary
    expect_code(8'h6A, 0, 0, 10'b010101_1100);  // D10.3
    expect_code(8'h6A, 0, 1, 10'b010101_0011);

    // Rules for every symbol; a stream of all bytes checks the run length.
    rd = 0; run = 0; last_bit = 0;
    for (int rep = 0; rep < 2; rep++) begin
      for (int i = 0; i < 256 + 5; i++) begin
        data  = (i < 256) ? 8'(i * 37 + rep) : kchars[i - 256];
        is_k  = (i >= 256);
        rd_in = rd; #1;
        ones = $countones(code);
        checks++;
        if (!(ones == 5 || (ones == 6 && !rd_in) || (ones == 4 && rd_in))) begin
          failures++; $display("FAIL disparity of %h rd=%b code=%b", data, rd_in, code);
        end
        checks++;
        if (rd_out !== ((ones == 5) ? rd_in : (ones == 6))) begin
          failures++; $display("FAIL rd_out of %h", data);
        end
        for (int b = 9; b >= 0; b--) begin
          if (code[b] == last_bit) run++; else run = 1;
          last_bit = code[b];
          if (run > 5) begin
            failures++; $display("FAIL run of %0d at byte %h", run, data);
            run = 0;
          end
        end
        rd = rd_out;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
