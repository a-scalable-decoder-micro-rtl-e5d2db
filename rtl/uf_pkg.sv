// uf_pkg: types and index arithmetic shared by the Union-Find decoder blocks.
//
// Decoding graph. One error type (X or Z) of one distance-d surface code
// is decoded on a cubic graph of R x C x T vertices, R = d rows, C = d-1
// columns and T = d syndrome rounds. Vertex v = (t*R + r)*C + c. Each vertex
// owns four edge slots, so edge id e = 4*v + dir:
//   DIR_PC (0): +c neighbour; at c = C-1 this is the right boundary edge
//   DIR_PR (1): +r neighbour; unused at r = R-1
//   DIR_PT (2): +t neighbour (a measurement error); unused at t = T-1
//   DIR_LB (3): left boundary edge; used only at c = 0
// Boundary edges end on one virtual boundary vertex "B". Only the left and
// right sides have boundary edges; this split of the lattice is this design's
// choice (the text only says errors on the boundary are seen at one end).
//
// Spanning Tree Memory word (one per vertex): one syndrome bit and two bits
// per owned edge (0 = empty, 1 = half grown, 2 = fully grown), as the text
// gives: "one bit for each vertex, and two bits per edge".
//
// Edge stack entry: edge id, direction flag and the two endpoint syndromes,
// following the {e1,right,0,1} entries drawn for the peeling example. The
// 16-bit edge id field is this design's choice; it covers d up to 25.
package uf_pkg;

  localparam int VID_W = 14;   // vertex index width
  localparam int EID_W = 16;   // edge id width (4 slots per vertex)

  typedef enum logic [1:0] {
    DIR_PC = 2'd0,
    DIR_PR = 2'd1,
    DIR_PT = 2'd2,
    DIR_LB = 2'd3
  } dir_e;

  localparam logic [1:0] ES_EMPTY = 2'd0;
  localparam logic [1:0] ES_HALF  = 2'd1;
  localparam logic [1:0] ES_FULL  = 2'd2;

  typedef struct packed {
    logic             syn;
    logic [3:0][1:0]  es;    // es[dir]
  } stm_word_t;

  // fwd = 1: the child is the non-owner endpoint (traversal along +axis).
  typedef struct packed {
    logic [EID_W-1:0] eid;
    logic             fwd;
    logic             s_par;
    logic             s_chd;
  } stk_entry_t;

  // The far end of edge slot (v, dir). isb = 1 when it is the boundary vertex,
  // valid = 0 when the slot does not exist in the lattice.
  typedef struct packed {
    logic             valid;
    logic             isb;
    logic [VID_W-1:0] vid;
  } far_end_t;

  function automatic far_end_t far_end(input logic [VID_W-1:0] v,
                                       input logic [1:0] dir,
                                       input int R, input int C, input int T);
    far_end_t f;
    int c, r, t;
    c = int'(v) % C;
    r = (int'(v) / C) % R;
    t = int'(v) / (R * C);
    f.valid = 1'b0;
    f.isb   = 1'b0;
    f.vid   = '0;
    unique case (dir)
      2'd0: begin
        f.valid = 1'b1;
        if (c == C - 1) f.isb = 1'b1;
        else            f.vid = v + 1'b1;
      end
      2'd1: if (r < R - 1) begin f.valid = 1'b1; f.vid = v + VID_W'(C); end
      2'd2: if (t < T - 1) begin f.valid = 1'b1; f.vid = v + VID_W'(R * C); end
      default: if (c == 0) begin f.valid = 1'b1; f.isb = 1'b1; end
    endcase
    return f;
  endfunction

  // Data qubit touched by an edge, or valid = 0 for a measurement (time) edge.
  // Horizontal edges of row r are numbered r*(C+1) + position (0..C), the
  // vertical edges follow from R*(C+1) on: d^2 + (d-1)^2 data qubits in all.
  typedef struct packed {
    logic        valid;
    logic [15:0] idx;
  } dq_t;

  function automatic dq_t data_qubit(input logic [EID_W-1:0] eid,
                                     input int R, input int C);
    dq_t q;
    int v, c, r;
    v = int'(eid) >> 2;
    c = v % C;
    r = (v / C) % R;
    q.valid = 1'b1;
    q.idx   = '0;
    unique case (eid[1:0])
      2'd0:    q.idx = 16'(r * (C + 1) + c + 1);
      2'd1:    q.idx = 16'(R * (C + 1) + r * C + c);
      2'd3:    q.idx = 16'(r * (C + 1));
      default: q.valid = 1'b0;
    endcase
    return q;
  endfunction

endpackage
