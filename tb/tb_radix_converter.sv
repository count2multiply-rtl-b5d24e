// tb_radix_converter: exhaustive check of the binary-to-radix conversion for
// radix 4 (the default) and radix 10, every 8-bit input, every scale and both
// slice signs, against a digit loop written here.
module tb_radix_converter;
  import c2m_pkg::*;
  int checks = 0, failures = 0;

  logic signed [7:0] x;
  logic [2:0]        sh;
  logic              neg;
  dir_e              dir4, dir10;
  logic [1:0]        dg4 [8];
  logic [3:0]        dg10 [5];
  logic [7:0]        nz4;
  logic [4:0]        nz10;
  logic              z4, z10;

  radix_converter #(.N_BITS(2)) u4 (.x, .shift(sh), .neg, .dir(dir4), .digit(dg4), .nz(nz4), .is_zero(z4));
  radix_converter #(.N_BITS(5)) u10 (.x, .shift(sh), .neg, .dir(dir10), .digit(dg10), .nz(nz10), .is_zero(z10));

  task automatic check_radix(input int radix, input int nd, input int mag);
    int m;
    m = mag;
    for (int i = 0; i < nd; i++) begin
      int got;
      got = (radix == 4) ? int'(dg4[i]) : int'(dg10[i]);
      checks++;
      if (got != m % radix || ((radix == 4) ? nz4[i] : nz10[i]) != (m % radix != 0)) begin
        failures++;
        if (failures < 10) $display("radix %0d x=%0d sh=%0d digit %0d: %0d exp %0d", radix, x, sh, i, got, m % radix);
      end
      m = m / radix;
    end
    checks++;
    if (m != 0) failures++;   // all digits captured
  endtask

  initial begin
    for (int xi = -128; xi < 128; xi++)
      for (int s = 0; s < 8; s++)
        for (int ng = 0; ng < 2; ng++) begin
          int mag;
          bit neg_exp;
          x = 8'(xi); sh = 3'(s); neg = 1'(ng);
          #1;
          mag = ((xi < 0) ? -xi : xi) << s;
          neg_exp = (xi < 0) ^ (ng == 1);
          checks++;
          if ((dir4 == DIR_DEC) != neg_exp || (dir10 == DIR_DEC) != neg_exp) failures++;
          checks++;
          if (z4 != (xi == 0) || z10 != (xi == 0)) failures++;
          check_radix(4, 8, mag);
          check_radix(10, 5, mag);
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
