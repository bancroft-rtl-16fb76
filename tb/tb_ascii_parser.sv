// tb_ascii_parser: builds FASTA text with header lines, line breaks, lower
// case and N bases from a random base list, streams it in beats with random
// byte masks and back-pressure, and checks the emitted strides against the
// base list, the count of non-ACGT letters and the padded final stride after
// flush.
module tb_ascii_parser;
  logic clk = 0, rst = 1;
  logic [127:0] in_data;
  logic [15:0]  in_keep;
  logic in_valid, in_ready, flush, out_partial, out_valid, out_ready;
  logic [31:0] out_stride, n_other;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  ascii_parser dut (.clk, .rst, .in_data, .in_keep, .in_valid, .in_ready, .flush,
                    .out_stride, .out_partial, .out_valid, .out_ready, .n_other);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  byte text [$];
  logic [1:0] bases [$];
  int n_other_exp = 0;
  int n_in = 0;

  function automatic byte letter(input logic [1:0] b, input bit lower);
    byte c;
    case (b) 2'd0: c = "A"; 2'd1: c = "C"; 2'd2: c = "G"; default: c = "T"; endcase
    return lower ? byte'(c + 8'd32) : c;
  endfunction

  always @(posedge clk) if (!rst) begin
    if (in_valid && in_ready) n_in++;
    if (out_valid && out_ready) begin
      logic [31:0] e;
      int nb;
      e = '0;
      nb = (bases.size() < 16) ? bases.size() : 16;
      for (int i = 0; i < nb; i++) e[2*i +: 2] = bases.pop_front();
      checks++;
      if (out_stride !== e || (out_partial !== (nb < 16))) begin
        failures++;
        $display("stride %h expected %h (partial %b, %0d bases)", out_stride, e, out_partial, nb);
      end
    end
  end

  initial begin
    string hdr;
    in_valid = 0; in_keep = 0; in_data = 0; flush = 0; out_ready = 1;
    // build the text: two records
    for (int r = 0; r < 2; r++) begin
      hdr = (r == 0) ? ">chr1 test ACGT record\n" : ">chr2\r\n";
      foreach (hdr[i]) text.push_back(hdr[i]);
      for (int l = 0; l < 9; l++) begin
        for (int i = 0; i < 37; i++) begin
          logic [1:0] b;
          b = 2'($urandom);
          if ($urandom % 50 == 0) begin
            text.push_back("N"); bases.push_back(2'b00); n_other_exp++;
          end else begin
            text.push_back(letter(b, ($urandom % 7) == 0)); bases.push_back(b);
          end
        end
        text.push_back(8'h0a);
      end
    end
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst = 0;
    while (text.size() > 0) begin
      int target;
      in_data = '0; in_keep = '0;
      for (int i = 0; i < 16 && text.size() > 0; i++) begin
        if ($urandom % 6 != 0) begin
          in_data[8*i +: 8] = text.pop_front();
          in_keep[i] = 1'b1;
        end
      end
      in_valid = 1;
      target = n_in + 1;
      while (n_in < target) begin
        out_ready = ($urandom % 4) != 0;
        @(negedge clk);
      end
    end
    in_valid = 0; out_ready = 1;
    repeat (4) @(negedge clk);
    flush = 1;
    @(negedge clk);
    flush = 0;
    repeat (6) @(negedge clk);
    checks++;
    if (bases.size() != 0) begin failures++; $display("%0d bases never emitted", bases.size()); end
    checks++;
    if (n_other != 32'(n_other_exp)) begin failures++; $display("n_other %0d exp %0d", n_other, n_other_exp); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
