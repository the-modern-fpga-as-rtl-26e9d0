`timescale 1ns/1ps
// tb_daq_pkg: checks the shared Gray-code functions over all 16-bit values:
// bin2gray matches the textbook definition b ^ (b >> 1) computed bit by bit,
// successive codes differ in exactly one bit, and gray2bin inverts bin2gray.
// It also checks the 36-bit size of the TDC hit record.
module tb_daq_pkg;
  import daq_pkg::*;
  int checks = 0, failures = 0;

  initial begin
    logic [31:0] g, gprev, b;
    gprev = '0;
    for (int v = 0; v < 65536; v++) begin
      logic [15:0] ref_g;
      for (int i = 0; i < 16; i++) ref_g[i] = (i == 15) ? v[15] : (v[i] ^ v[i+1]);
      g = bin2gray(32'(v));
      b = gray2bin(g);
      checks += 3;
      if (g[15:0] !== ref_g) begin failures++; if (failures < 10) $display("FAIL bin2gray(%0d)", v); end
      if (b !== 32'(v))      begin failures++; if (failures < 10) $display("FAIL gray2bin(bin2gray(%0d)) = %0d", v, b); end
      if (v > 0 && $countones(g ^ gprev) != 1) begin
        failures++; if (failures < 10) $display("FAIL step to %0d changes %0d bits", v, $countones(g ^ gprev));
      end
      gprev = g;
    end
    checks++;
    if (HIT_BITS != 36) begin failures++; $display("FAIL record size %0d", HIT_BITS); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
