// pefp_pkg: types and sizes shared by every block of the PEFP path enumeration engine.
//
// A vertex is a VID_W-bit index into the CSR graph, an edge pointer is a PTR_W-bit index into
// the CSR edge array. An intermediate path is stored as a fixed record (path_rec_t) holding up
// to MAX_K vertices, its length in hops and three neighbour pointers of its last vertex:
// nb_start / nb_end (the "start" and "end neighbour" pointers that Batch-DFS moves through the
// successor list of a super node) and nb_last (one past the last successor).
// An intermediate path never has more than k vertices (a path of k-1 hops can only be extended
// by t, which is reported, never stored), so MAX_K vertices cover every k <= MAX_K.
// A reported result has up to MAX_K+1 vertices.
// The widths and MAX_K are this design's own choices; the paper gives none of them.
package pefp_pkg;

  parameter int unsigned VID_W = 32;   // vertex id width
  parameter int unsigned PTR_W = 32;   // CSR edge pointer width
  parameter int unsigned MAX_K = 16;   // largest hop constraint supported
  parameter int unsigned LEN_W = 5;    // hop counter / barrier width, holds 0..MAX_K+1

  typedef logic [VID_W-1:0] vid_t;
  typedef logic [PTR_W-1:0] eptr_t;
  typedef logic [LEN_W-1:0] hop_t;

  // One intermediate path of the buffer area, the processing area or the DRAM path set.
  typedef struct packed {
    vid_t [MAX_K-1:0] v;        // v[0] = s, v[len] = last vertex; entries above len unused
    hop_t             len;      // hops, len(p) = |p| - 1
    eptr_t            nb_start; // start neighbour pointer
    eptr_t            nb_end;   // end neighbour pointer
    eptr_t            nb_last;  // one past the last neighbour of v[len]
  } path_rec_t;

  // One reported s-t path.
  typedef struct packed {
    vid_t [MAX_K:0] v;          // v[0] = s ... v[len] = t
    hop_t           len;
  } result_t;

  // Verdict of the validity check for one successor.
  typedef enum logic [1:0] {
    VERDICT_VALID   = 2'd0,     // append and write back to the buffer area
    VERDICT_TARGET  = 2'd1,     // successor is t: report p + t
    VERDICT_BARRIER = 2'd2,     // pruned by the barrier check
    VERDICT_VISITED = 2'd3      // pruned by the visited check
  } verdict_e;

  // Event counters of one query, for monitoring and testing.
  typedef struct packed {
    logic [31:0] results;     // s-t paths reported
    logic [31:0] pushed;      // intermediate paths written back
    logic [31:0] barrier;     // successors pruned by the barrier check
    logic [31:0] visited;     // successors pruned by the visited check
    logic [31:0] batches;     // batches fetched by Batch-DFS
    logic [31:0] splits;      // super-node paths handed out only in part
    logic [31:0] flushes;     // buffer area flushed to DRAM
    logic [31:0] refills;     // buffer area refilled from DRAM
    logic [31:0] edge_miss;   // edge lookups served by DRAM
    logic [31:0] vtx_miss;    // vertex/barrier lookups served by DRAM
  } pefp_stats_t;

endpackage
