`timescale 1ps/1ps
// tb_analog_mux -- sel = 0 passes the preamplifier voltage, sel = 1 the receiver
// buffer voltage; random values.
module tb_analog_mux;
  import pom_pkg::*;
  logic sel;
  uv_t  pre, ext, out;
  int checks = 0, failures = 0;

  analog_mux dut (.sel(sel), .pre(pre), .ext(ext), .out(out));

  initial begin
    repeat (200) begin
      pre = uv_t'(int'($urandom_range(0, 200_000)) - 100_000);
      ext = uv_t'(int'($urandom_range(0, 200_000)) - 100_000);
      sel = 1'($urandom_range(0, 1));
      #10;
      checks++; if (out !== (sel ? ext : pre)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
