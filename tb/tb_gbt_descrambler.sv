// tb_gbt_descrambler: a bit-serial scrambler model feeds the 21-bit and the
// 16-bit descramblers; from the second enabled word on, the output must be the
// original data, and it must hold while the enable is low.
module tb_gbt_descrambler;
  logic clk = 0, rst = 1, en = 0;
  logic [20:0] s21, q21, d21, p21;
  logic [15:0] s16, q16, d16, p16;
  int checks = 0, failures = 0;
  bit  h21 [$];
  bit  h16 [$];

  gbt_descrambler #(.WIDTH(21), .TAP(2)) u21 (.clk, .rst, .en, .din(s21), .dout(q21));
  gbt_descrambler #(.WIDTH(16), .TAP(3)) u16 (.clk, .rst, .en, .din(s16), .dout(q16));

  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    logic [20:0] old;
    for (int i = 0; i < 21; i++) h21.push_back(1'($urandom));
    for (int i = 0; i < 16; i++) h16.push_back(1'($urandom));
    s21 = 0; s16 = 0;
    @(negedge clk); @(negedge clk); rst = 0;
    for (int n = 0; n < 200; n++) begin
      en = (n % 4 != 3);
      old = q21;
      if (en) begin
        d21 = 21'($urandom); d16 = 16'($urandom);
        for (int i = 0; i < 21; i++) begin
          s21[i] = d21[i] ^ h21[h21.size()-2] ^ h21[h21.size()-21]; h21.push_back(s21[i]);
        end
        for (int i = 0; i < 16; i++) begin
          s16[i] = d16[i] ^ h16[h16.size()-3] ^ h16[h16.size()-16]; h16.push_back(s16[i]);
        end
      end
      @(negedge clk);
      if (n >= 2) begin
        checks++;
        if (en && (q21 !== d21 || q16 !== d16)) begin
          failures++; $display("mismatch n=%0d %h/%h %h/%h", n, q21, d21, q16, d16);
        end
        if (!en && q21 !== old) begin failures++; $display("changed without enable"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
