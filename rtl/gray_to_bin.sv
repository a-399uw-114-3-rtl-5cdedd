// Gray-to-binary decoder.
// Converts the sampled reflected Gray code of the ring-oscillator state into
// a binary count: b[i] is the XOR of all Gray bits at and above position i.
// Purely combinational; W defaults to the 6 bits of the extended Gray code.
// The decoder is named in the channel description; the XOR-prefix structure
// is the standard one and is this design's choice.
`timescale 1ns / 1ps
module gray_to_bin #(
  parameter int unsigned W = 6
) (
  input  logic [W-1:0] g,
  output logic [W-1:0] b
);
  always_comb begin
    b[W-1] = g[W-1];
    for (int i = int'(W) - 2; i >= 0; i--) b[i] = b[i+1] ^ g[i];
  end
endmodule
