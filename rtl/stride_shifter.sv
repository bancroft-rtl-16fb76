// stride_shifter: slides a K-base window over the target sequence in steps of
// one stride (S bases, one 32-bit word) and emits the window as a k-mer for
// every stride that enters.
//
// The window register holds K/S strides; a new stride enters at the top, so
// the oldest base of the k-mer sits in bits [1:0]. in_first restarts the
// window for a new sequence. Until K/S strides of the current sequence have
// entered, out_kmer_valid is 0: the stride is still passed on (software needs
// every stride to rebuild the target) but no lookup is made for it.
// Streams use valid/ready; the stage is one register deep and advances when
// the output is free or taken. The hardware always advances by S; the jump by
// K after a match belongs to the software side that owns the offset table.
module stride_shifter
  import bancroft_pkg::*;
#(
  parameter int unsigned K = K_BASES,
  parameter int unsigned S = S_BASES
) (
  input  logic           clk,
  input  logic           rst,
  input  logic [2*S-1:0] in_stride,
  input  logic           in_first,
  input  logic           in_valid,
  output logic           in_ready,
  output logic [2*K-1:0] out_kmer,
  output logic [2*S-1:0] out_stride,
  output logic           out_kmer_valid,
  output logic           out_valid,
  input  logic           out_ready
);
  localparam int unsigned NS = K / S;
  localparam int unsigned FW = $clog2(NS + 1);

  logic [2*K-1:0] win_q;
  logic [FW-1:0]  fill_q;

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      win_q          <= '0;
      fill_q         <= '0;
      out_valid      <= 1'b0;
      out_kmer_valid <= 1'b0;
      out_stride     <= '0;
      out_kmer       <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        logic [2*K-1:0] w;
        logic [FW-1:0]  f;
        w = in_first ? '0 : win_q;
        f = in_first ? '0 : fill_q;
        w = {in_stride, w[2*K-1:2*S]};
        if (f != FW'(NS)) f = f + 1'b1;
        win_q          <= w;
        fill_q         <= f;
        out_kmer       <= w;
        out_stride     <= in_stride;
        out_kmer_valid <= (f == FW'(NS));
      end
    end
  end
endmodule
