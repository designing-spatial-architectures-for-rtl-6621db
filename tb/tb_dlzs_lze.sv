// tb_dlzs_lze: exhaustive test of the leading-one encoder over all 256 INT8
// inputs in encode mode and all 16 codes in bypass mode. The expected code is
// worked out arithmetically: the largest power of two not above |b| (|-128|
// taken as 127) and the sign of b; zero maps to position 7.
`timescale 1ns/1ps
module tb_dlzs_lze;
  import star_pkg::*;
  logic signed [7:0] b;
  logic bypass;
  logic [3:0] code;
  logic zero;
  int checks = 0, failures = 0;

  dlzs_lze dut (.b_i(b), .bypass_i(bypass), .code_o(code), .zero_o(zero));

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bypass = 1'b0;
    for (int v = -128; v < 128; v++) begin
      int mag, p;
      logic [3:0] exp_code;
      b = 8'(v);
      #1;
      mag = (v < 0) ? -v : v;
      if (mag > 127) mag = 127;
      if (mag == 0) exp_code = 4'b0111;
      else begin
        p = 0;
        while (2 ** (p + 1) <= mag) p++;
        exp_code = {v < 0, 3'(p)};
      end
      checks++;
      if (code !== exp_code || zero !== (mag == 0)) begin
        failures++;
        $display("FAIL b=%0d code=%b expected %b", v, code, exp_code);
      end
    end
    bypass = 1'b1;
    for (int c = 0; c < 16; c++) begin
      b = 8'($urandom_range(15, 0) << 4 | c);
      #1;
      checks++;
      if (code !== 4'(c) || zero !== (c[2:0] == 3'd7)) begin
        failures++;
        $display("FAIL bypass code %0d gave %b", c, code);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
