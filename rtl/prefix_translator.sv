// prefix_translator: decodes a prefix bitmap into prefix node indices.
//
// A prefix of a node in the Hasse graph differs from it by one 1-to-0 bit
// flip, so bit b of a prefix bitmap stands for the node with bit b cleared;
// storing the bitmap instead of the indices saves a factor T of memory.
// Outputs every candidate (prefixes[b]) and the first one, defined as the one
// of the highest set bitmap bit (the order in which the candidates are listed
// and chosen in the paper's examples). Combinational.
module prefix_translator #(
  parameter int unsigned T = 8
) (
  input  logic [T-1:0]         node,
  input  logic [T-1:0]         bitmap,
  output logic [T-1:0]         prefixes [T],
  output logic [T-1:0]         valid,
  output logic [T-1:0]         first,
  output logic [$clog2(T)-1:0] first_bit,
  output logic                 any
);
  always_comb begin
    valid     = bitmap & node;
    any       = |valid;
    first     = '0;
    first_bit = '0;
    for (int b = 0; b < T; b++) begin
      prefixes[b] = node & ~(T'(1) << b);
      if (valid[b]) begin
        first     = prefixes[b];
        first_bit = b[$clog2(T)-1:0];
      end
    end
  end
endmodule
