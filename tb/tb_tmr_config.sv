`timescale 1ps/1ps
// tb_tmr_config -- writes random words and reads them back, then upsets one
// copy (a bit flip written straight into one of the three registers) and checks
// the voted output is unchanged; upsetting the same bit in two copies must change
// it, which shows the output is a vote and not one copy.
module tb_tmr_config;
  logic        clk = 1'b0, rst_n = 1'b0, we = 1'b0;
  logic [11:0] wdata = '0, q;
  int checks = 0, failures = 0;

  tmr_config #(.WIDTH(12)) dut (.clk(clk), .rst_n(rst_n), .we(we), .wdata(wdata), .q(q));

  always #10000 clk = ~clk;

  initial begin
    @(posedge clk); #1;
    checks++; if (q !== 12'h0) failures++;
    rst_n = 1'b1;
    repeat (50) begin
      logic [11:0] w;
      int b;
      w = 12'($urandom);
      wdata = w; we = 1'b1;
      @(posedge clk); #1 we = 1'b0; wdata = ~w;
      @(posedge clk); #1;
      checks++; if (q !== w) failures++;          // held, not following wdata
      b = int'($urandom_range(0, 11));
      case ($urandom_range(0, 2))
        0: dut.copy_a[b] = ~dut.copy_a[b];
        1: dut.copy_b[b] = ~dut.copy_b[b];
        default: dut.copy_c[b] = ~dut.copy_c[b];
      endcase
      #1;
      checks++; if (q !== w) failures++;          // single upset masked
      dut.copy_a[b] = ~w[b];
      dut.copy_b[b] = ~w[b];
      dut.copy_c[b] = w[b];
      #1;
      checks++; if (q[b] !== ~w[b]) failures++;   // double upset wins the vote
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
