// asmcap_htree -- H-tree that carries commands and reads from the controller
// and global buffer to all ASMCap arrays.
//
// A balanced binary tree with a register at every node: the root register
// takes the input, and each node's two children copy it one cycle later, so
// every leaf sees the same payload at the same time, log2(LEAVES)+1 cycles
// after it entered. Equal path lengths to every array are the point of an
// H-tree layout; the per-node registers are this design's choice (the paper
// only names the H-tree). Nodes are stored in heap order: node 0 is the root,
// the children of node k are 2k+1 and 2k+2, and the leaves are nodes
// LEAVES-1 .. 2*LEAVES-2. LEAVES must be a power of two. Only the valid bits
// are reset.
module asmcap_htree #(
  parameter int unsigned W      = 8,
  parameter int unsigned LEAVES = 512
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] in_data,
  output logic         out_valid [LEAVES],
  output logic [W-1:0] out_data  [LEAVES]
);
  localparam int unsigned NODES = 2 * LEAVES - 1;

  if ((LEAVES & (LEAVES - 1)) != 0) begin : g_bad
    $error("asmcap_htree: LEAVES must be a power of two");
  end

  logic         v [NODES];
  logic [W-1:0] d [NODES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned k = 0; k < NODES; k++) v[k] <= 1'b0;
    end else begin
      v[0] <= in_valid;
      for (int unsigned k = 1; k < NODES; k++) v[k] <= v[(k - 1) / 2];
    end
  end

  always_ff @(posedge clk) begin
    d[0] <= in_data;
    for (int unsigned k = 1; k < NODES; k++) d[k] <= d[(k - 1) / 2];
  end

  for (genvar l = 0; l < LEAVES; l++) begin : g_leaf
    assign out_valid[l] = v[LEAVES - 1 + l];
    assign out_data[l]  = d[LEAVES - 1 + l];
  end
endmodule
