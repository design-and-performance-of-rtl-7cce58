`timescale 1ps/1ps
// tb_adc_correction -- feeds random stage codes with the pipeline's skew (stage i
// delivers sample s's code at clock s+i) and expects, STAGES clocks after the
// first stage's code, 1 + sum_i d_i * 2^(STAGES-1-i) for that sample.
module tb_adc_correction;
  localparam int S = 7;
  localparam int N = 200;
  logic       clk = 1'b0;
  logic [1:0] d [S];
  logic [7:0] code;
  logic [1:0] codes [N+S][S];
  int checks = 0, failures = 0;

  adc_correction #(.STAGES(S), .BITS(8)) dut (.clk(clk), .d(d), .code(code));

  always #10000 clk = ~clk;

  function automatic int expected(int s);
    int e = 1;
    for (int i = 0; i < S; i++) e += int'(codes[s][i]) << (S-1-i);
    return e;
  endfunction

  initial begin
    for (int s = 0; s < N+S; s++)
      for (int i = 0; i < S; i++) codes[s][i] = 2'($urandom_range(0, 2));
    for (int i = 0; i < S; i++) codes[0][i] = 2'd2;   // full scale
    for (int i = 0; i < S; i++) codes[1][i] = 2'd0;   // bottom
    // cycle c: stage i presents sample c-i; check sample c-S after edge c
    for (int c = 0; c < N + 2*S; c++) begin
      for (int i = 0; i < S; i++) d[i] = (c - i >= 0 && c - i < N+S) ? codes[c-i][i] : 2'd1;
      @(posedge clk); #1;
      if (c - S + 1 >= 0 && c - S + 1 < N) begin
        checks++;
        if (int'(code) != expected(c - S + 1)) begin
          failures++;
          $display("sample %0d code %0d expected %0d", c-S+1, code, expected(c-S+1));
        end
      end
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
