// tb_gbt_tx_gearbox: after a start pulse the six words must be frame bits
// 119..100, 99..80, ... 19..0, each bit-reversed, W1 first, one per cycle.
module tb_gbt_tx_gearbox;
  import gbt_pkg::*;
  logic clk = 0, rst = 1, start = 0, w1;
  frame_t f;
  word_t  q, e;
  int checks = 0, failures = 0;
  gbt_tx_gearbox dut (.clk, .rst, .start_i(start), .frame_i(f), .word_o(q), .w1_o(w1));
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    f = '0;
    @(negedge clk); rst = 0;
    for (int n = 0; n < 30; n++) begin
      f = {$urandom, $urandom, $urandom, $urandom};
      start = 1; @(negedge clk); start = 0;
      for (int k = 0; k < 6; k++) begin
        for (int j = 0; j < 20; j++) e[j] = f[119 - 20*k - j];
        checks++;
        if (q !== e || w1 !== (k == 0)) begin failures++; $display("n=%0d k=%0d %h %h", n, k, q, e); end
        if (k < 5) @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
