// tb_dec_8b10b: self-checking test of the 8B/10B decoder.
//
// Decodes code words taken from the standard tables, then every data byte and
// every standard control character in both disparities as produced by the
// encoder, and checks data, K flag, disparity tracking and the absence of
// error flags. Invalid words (all zeros, all ones, a six-bit group with five
// ones) and a word sent with the wrong running disparity must raise errors.
module tb_dec_8b10b;
  logic [9:0] code, ecode;
  logic       rd_in, rd_out, is_k, code_err, disp_err;
  logic [7:0] data;
  logic [7:0] edata;
  logic       ek, erd_in, erd_out;
  int checks = 0, failures = 0;

  dec_8b10b dut (.code, .rd_in, .data, .is_k, .rd_out, .code_err, .disp_err);
  enc_8b10b ref_enc (.data(edata), .is_k(ek), .rd_in(erd_in), .code(ecode), .rd_out(erd_out));

  task automatic check(input logic [9:0] c, input logic rd, input logic [7:0] d,
                       input logic k, input logic cerr, input logic derr);
    code = c; rd_in = rd; #1;
    checks++;
    if (cerr) begin
      if (!code_err) begin failures++; $display("FAIL %b not flagged as invalid", c); end
    end else if (derr) begin
      if (!disp_err) begin failures++; $display("FAIL %b rd=%b no disparity error", c, rd); end
    end else if (data !== d || is_k !== k || code_err || disp_err) begin
      failures++;
      $display("FAIL %b rd=%b -> %h k=%b ce=%b de=%b, expected %h k=%b", c, rd, data, is_k,
               code_err, disp_err, d, k);
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] kchars [9];
    kchars = '{8'h1C, 8'h3C, 8'h5C, 8'h7C, 8'h9C, 8'hBC, 8'hDC, 8'hFB, 8'hFD};
    check(10'b001111_1010, 0, 8'hBC, 1, 0, 0);
    check(10'b110000_0101, 1, 8'hBC, 1, 0, 0);
    check(10'b110000_0110, 1, 8'h3C, 1, 0, 0);
    check(10'b100111_0100, 0, 8'h00, 0, 0, 0);
    check(10'b101010_1010, 1, 8'hB5, 0, 0, 0);
    check(10'b100011_0111, 0, 8'hF1, 0, 0, 0);
    check(10'b110110_1000, 0, 8'hFB, 1, 0, 0);
    check(10'b000000_0000, 0, 8'h00, 0, 1, 0);
    check(10'b111111_1111, 1, 8'h00, 0, 1, 0);
    check(10'b111110_0101, 0, 8'h00, 0, 1, 0);
    check(10'b100111_0100, 1, 8'h00, 0, 0, 1);   // D0.0 RD- form at positive disparity
    for (int r = 0; r < 2; r++) begin
      for (int i = 0; i < 256 + 9; i++) begin
        edata  = (i < 256) ? 8'(i) : kchars[i - 256];
        ek     = (i >= 256);
        erd_in = 1'(r); #1;
        check(ecode, 1'(r), edata, ek, 0, 0);
        checks++;
        if (rd_out !== erd_out) begin failures++; $display("FAIL rd_out for %h", edata); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
