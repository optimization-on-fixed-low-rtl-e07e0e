// tb_gbt_rx_bitshift_mux: random words; each Sel value must pick the bits the
// selection table names out of {current word, previous word}.
module tb_gbt_rx_bitshift_mux;
  logic clk = 0, rst = 1;
  logic [19:0] w, prev, q;
  logic [1:0] sel;
  logic [39:0] both;
  int checks = 0, failures = 0;
  gbt_rx_bitshift_mux dut (.clk, .rst, .word_i(w), .sel_i(sel), .word_o(q));
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    w = 0; sel = 0; prev = 0;
    @(negedge clk); rst = 0;
    for (int n = 0; n < 200; n++) begin
      w = 20'($urandom); sel = 2'(n);
      #1;
      both = {w, prev};
      checks++;
      case (sel)
        2'b00: if (q !== both[39:20]) failures++;
        2'b01: if (q !== both[38:19]) failures++;
        2'b10: if (q !== both[29:10]) failures++;
        2'b11: if (q !== both[28:9])  failures++;
      endcase
      @(negedge clk);
      prev = w;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
