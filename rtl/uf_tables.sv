// uf_tables: the Root Table and the Size Table of the Union-Find growth.
//
// Both tables have one entry per decoding-graph vertex, the largest number of
// clusters there can be. RootTable[i] points towards the root of the cluster
// that holds vertex i; a root points at itself. SizeTable[root] is the size of
// the cluster. As drawn in the paper's Gr-Gen example, the tables start with
// RootTable[i] = i and SizeTable[i] = 1 for a non-trivial syndrome bit and 0
// otherwise, so a size counts the syndrome defects merged into a cluster.
// In the paper's optimised block one pair of tables is shared by the two
// Graph Generators, who take turns; the sharing is done by the block.
//
// Interface: init loads the initial state in one cycle from init_syn. Two
// combinational read ports (a, b) return root and size of an address. One
// write port per table; a write lands at the clock edge. init wins over writes.
module uf_tables #(
  parameter int NV = 1210
) (
  input  logic                    clk,
  input  logic                    init,
  input  logic [NV-1:0]           init_syn,
  input  logic [uf_pkg::VID_W-1:0] rd_a,
  input  logic [uf_pkg::VID_W-1:0] rd_b,
  output logic [uf_pkg::VID_W-1:0] root_a,
  output logic [uf_pkg::VID_W-1:0] root_b,
  output logic [uf_pkg::VID_W-1:0] size_a,
  output logic [uf_pkg::VID_W-1:0] size_b,
  input  logic                    root_we,
  input  logic [uf_pkg::VID_W-1:0] root_wa,
  input  logic [uf_pkg::VID_W-1:0] root_wd,
  input  logic                    size_we,
  input  logic [uf_pkg::VID_W-1:0] size_wa,
  input  logic [uf_pkg::VID_W-1:0] size_wd
);
  import uf_pkg::*;

  logic [VID_W-1:0] root_tab [NV];
  logic [VID_W-1:0] size_tab [NV];

  assign root_a = root_tab[rd_a];
  assign root_b = root_tab[rd_b];
  assign size_a = size_tab[rd_a];
  assign size_b = size_tab[rd_b];

  always_ff @(posedge clk) begin
    if (init) begin
      for (int i = 0; i < NV; i++) begin
        root_tab[i] <= VID_W'(i);
        size_tab[i] <= VID_W'(init_syn[i]);
      end
    end else begin
      if (root_we) root_tab[root_wa] <= root_wd;
      if (size_we) size_tab[size_wa] <= size_wd;
    end
  end

endmodule
