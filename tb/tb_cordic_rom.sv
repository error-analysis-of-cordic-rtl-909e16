// tb_cordic_rom -- checks every word of the CORDIC constant memory.
//
// The expected words are computed here with real arithmetic:
// round(atan(2^-i) * 2^15) for i = 0..15, round(2^15 / prod sqrt(1+2^-2i))
// at address 16, and 0 for the unused addresses 17..31.
module tb_cordic_rom;
  import cordic_pkg::*;

  logic [ROM_AW-1:0]  addr;
  logic [CONST_W-1:0] data;
  int checks = 0, failures = 0;

  cordic_rom dut (.addr(addr), .data(data));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real k;
    int  expect_w;
    k = 1.0;
    for (int i = 0; i < 32; i++) begin
      addr = ROM_AW'(i);
      #1;
      if (i < 16) begin
        expect_w = $rtoi($floor($atan(2.0 ** (-i)) * 32768.0 + 0.5));
        k = k * $sqrt(1.0 + 2.0 ** (-2 * i));
      end else if (i == 16) begin
        expect_w = $rtoi($floor(32768.0 / k + 0.5));
      end else begin
        expect_w = 0;
      end
      checks++;
      if (int'(data) != expect_w) begin
        failures++;
        $display("FAIL addr %0d: got %0d expected %0d", i, data, expect_w);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
