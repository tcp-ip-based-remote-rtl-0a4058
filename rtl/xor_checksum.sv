// xor_checksum: running XOR of the 16-bit words of a packet.
//
// Every DATA packet of the upgrade protocol carries an XOR checksum word. This block
// folds each word presented with `en` into `sum`; `clear` restarts it (clear wins over
// en in the same cycle). `sum` is registered: it includes a word one clock after that
// word's `en`. Using XOR follows the protocol; which words are covered (here all words
// before the CHECKSUM word) and the 16-bit width are this design's choice.
module xor_checksum #(
  parameter int unsigned W = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         en,
  input  logic [W-1:0] word,
  output logic [W-1:0] sum
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      sum <= '0;
    else if (clear)  sum <= '0;
    else if (en)     sum <= sum ^ word;
  end
endmodule
