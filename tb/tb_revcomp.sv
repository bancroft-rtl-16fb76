// tb_revcomp: checks the reverse complement against a per-base table model
// on a fixed k-mer and on random ones, and that applying it twice returns
// the input.
module tb_revcomp;
  import tb_pkg::*;
  logic [127:0] in_seq, out_seq, back;
  int checks = 0, failures = 0;
  revcomp #(.NB(64)) dut  (.in_seq(in_seq), .out_seq(out_seq));
  revcomp #(.NB(64)) dut2 (.in_seq(out_seq), .out_seq(back));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // "ACGT" repeated: base0 = A; rc of ACGT is ACGT
    in_seq = '0;
    for (int i = 0; i < 64; i++) in_seq[2*i +: 2] = 2'(i % 4);
    #1;
    checks++; if (out_seq !== in_seq) begin failures++; $display("ACGT palindrome failed"); end
    // AAAA..C -> G TTTT..
    in_seq = '0; in_seq[127:126] = 2'b01;
    #1;
    checks++; if (out_seq[1:0] !== 2'b10 || out_seq[127:2] !== {63{2'b11}}) begin failures++; $display("single C failed %h", out_seq); end
    for (int t = 0; t < 200; t++) begin
      in_seq = {$urandom, $urandom, $urandom, $urandom};
      #1;
      checks++;
      if (out_seq !== rc64(in_seq) || back !== in_seq) begin
        failures++;
        $display("mismatch in=%h out=%h exp=%h", in_seq, out_seq, rc64(in_seq));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
