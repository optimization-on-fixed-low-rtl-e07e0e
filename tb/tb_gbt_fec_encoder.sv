// tb_gbt_fec_encoder: every code word built from the data field and the
// produced FEC field must evaluate to zero at alpha^1..alpha^4 (the roots of
// the generator), computed here with a separate GF(16) multiplier.
module tb_gbt_fec_encoder;
  logic [83:0] d;
  logic [31:0] f;
  int checks = 0, failures = 0;

  gbt_fec_encoder dut (.data_i(d), .fec_o(f));

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic logic [3:0] mul(logic [3:0] a, logic [3:0] b);
    logic [3:0] r = 0, x = a;
    for (int i = 0; i < 4; i++) begin
      if (b[i]) r ^= x;
      x = {x[2:0], 1'b0} ^ (x[3] ? 4'b0011 : 4'b0000);
    end
    return r;
  endfunction

  initial begin
    logic [3:0] sym, acc, pw, a;
    for (int n = 0; n < 300; n++) begin
      d = {20'($urandom), 32'($urandom), 32'($urandom)};
      if (n == 0) d = '0;
      #1;
      if (n == 0) begin checks++; if (f !== 0) failures++; end
      for (int cw = 0; cw < 2; cw++)
        for (int j = 1; j <= 4; j++) begin
          a = 4'd1;
          for (int k = 0; k < j; k++) a = mul(a, 4'd2);   // alpha^j
          acc = 0; pw = 4'd1;
          for (int p = 0; p < 15; p++) begin
            if (p < 4) sym = f[4*(2*p+cw) +: 4];
            else if (2*(p-4)+cw <= 20) sym = d[4*(2*(p-4)+cw) +: 4];
            else sym = 0;
            acc ^= mul(sym, pw);
            pw = mul(pw, a);
          end
          checks++;
          if (acc != 0) begin failures++; $display("syndrome n=%0d cw=%0d j=%0d = %h", n, cw, j, acc); end
        end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
