// tb_gbt_scrambler: checks the 21-bit (tap 2) and 16-bit (tap 3) scramblers
// against a bit-serial model of s[n] = d[n] ^ s[n-TAP] ^ s[n-WIDTH], and that
// the register holds while the enable is low.
module tb_gbt_scrambler;
  logic clk = 0, rst = 1, en = 0;
  logic [20:0] d21, q21;
  logic [15:0] d16, q16;
  int checks = 0, failures = 0;
  bit  h21 [$];
  bit  h16 [$];

  gbt_scrambler #(.WIDTH(21), .TAP(2), .SEED(21'h0ABCDE)) u21 (.clk, .rst, .en, .din(d21), .dout(q21));
  gbt_scrambler #(.WIDTH(16), .TAP(3), .SEED(16'h1234))   u16 (.clk, .rst, .en, .din(d16), .dout(q16));

  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic logic [20:0] ref21(logic [20:0] d);
    logic [20:0] s;
    for (int i = 0; i < 21; i++) begin
      s[i] = d[i] ^ h21[h21.size()-2] ^ h21[h21.size()-21];
      h21.push_back(s[i]);
    end
    return s;
  endfunction
  function automatic logic [15:0] ref16(logic [15:0] d);
    logic [15:0] s;
    for (int i = 0; i < 16; i++) begin
      s[i] = d[i] ^ h16[h16.size()-3] ^ h16[h16.size()-16];
      h16.push_back(s[i]);
    end
    return s;
  endfunction

  initial begin
    logic [20:0] e21, old21;
    logic [15:0] e16;
    d21 = 0; d16 = 0;
    for (int i = 0; i < 21; i++) h21.push_back(21'h0ABCDE >> i);
    for (int i = 0; i < 16; i++) h16.push_back(16'h1234 >> i);
    @(negedge clk); @(negedge clk); rst = 0;
    for (int n = 0; n < 200; n++) begin
      d21 = 21'($urandom); d16 = 16'($urandom);
      en = (n % 3 != 2);
      old21 = q21;
      if (en) begin e21 = ref21(d21); e16 = ref16(d16); end
      @(negedge clk);
      checks++;
      if (en && (q21 !== e21 || q16 !== e16)) begin
        failures++; $display("mismatch n=%0d %h/%h %h/%h", n, q21, e21, q16, e16);
      end
      if (!en && q21 !== old21) begin failures++; $display("changed without enable"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
