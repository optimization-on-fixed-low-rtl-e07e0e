// tb_gbt_fec_decoder: code words from the encoder are corrupted with up to two
// wrong nibbles per code word, or with a 16-bit burst starting on a nibble
// boundary anywhere in the 116-bit field; the decoder must return the
// original data and flag the correction.  Clean words must pass unflagged,
// and words with three wrong nibbles in one code word must not pass as clean.
module tb_gbt_fec_decoder;
  logic [83:0] d, dq, dout;
  logic [31:0] f, fq;
  logic [1:0]  corr, unc;
  int checks = 0, failures = 0;
  int n_corr = 0;

  gbt_fec_encoder enc (.data_i(d), .fec_o(f));
  gbt_fec_decoder dut (.data_i(dq), .fec_i(fq), .data_o(dout), .corrected_o(corr), .uncorrectable_o(unc));

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    logic [115:0] cw, err;
    int nib, nerr;
    for (int n = 0; n < 600; n++) begin
      d = {20'($urandom), 32'($urandom), 32'($urandom)};
      #1;
      err = '0;
      case (n % 4)
        0: ;
        1: begin  // random nibbles, at most two per code word
             nerr = 1 + $urandom % 4;
             for (int k = 0; k < nerr; k++) begin
               nib = 2 * ($urandom % 14) + (k % 2);   // nibbles 0..27
               err[4*nib +: 4] = 4'($urandom % 15 + 1);
             end
           end
        2: begin  // aligned 16-bit burst
             nib = $urandom % 26;
             err[4*nib +: 16] = 16'($urandom | 1);
           end
        3: begin  // three wrong nibbles in code word 0
             err[0 +: 4] = 4'hF; err[16 +: 4] = 4'h3; err[40 +: 4] = 4'h9;
           end
      endcase
      cw = {d, f} ^ err;
      dq = cw[115:32]; fq = cw[31:0];
      #1;
      checks++;
      if (n % 4 == 0) begin
        if (dout !== d || corr != 0 || unc != 0) begin failures++; $display("clean word altered n=%0d", n); end
      end else if (n % 4 == 3) begin
        if (unc == 0 && corr == 0) begin failures++; $display("3 errors not detected n=%0d", n); end
      end else begin
        if (dout !== d) begin failures++; $display("not corrected n=%0d err=%h", n, err); end
        else n_corr++;
        if (corr == 0) begin failures++; $display("correction not flagged n=%0d", n); end
      end
    end
    $display("corrected words: %0d", n_corr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
