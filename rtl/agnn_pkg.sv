// agnn_pkg: types and constants shared by the graph-preprocessing accelerator.
//
// A vertex identifier (VID) is 32 bits. An edge is held as one 64-bit element
// that concatenates the destination VID (upper half) and the source VID (lower
// half), so that sorting the element as an unsigned number sorts edges by
// destination first and by source second. The all-ones element is reserved as
// padding: it sorts after every real edge, so real VIDs must stay below
// 2^vid_bits - 1 for the configured VID width.
//
// Work handed to a UPE is described by upe_job_t: sort one chunk in place,
// merge two sorted runs, or sample k neighbours of one vertex.
//
// From the paper: 32-bit VIDs and the concatenated (dst, src) edge, so one
// sort orders by destination and source. This design's own: the padding
// element and the job descriptor fields.
package agnn_pkg;

  localparam int unsigned VID_W  = 32;
  localparam int unsigned ELEM_W = 2 * VID_W;

  typedef logic [VID_W-1:0]  vid_t;
  typedef logic [ELEM_W-1:0] elem_t;

  localparam elem_t PAD_ELEM = '1;

  // Scratchpad row addresses and element counts.
  localparam int unsigned ROW_AW = 16;
  typedef logic [ROW_AW-1:0] row_addr_t;

  typedef enum logic [1:0] {
    JOB_SORT   = 2'd0,  // radix-sort the W elements of rows a, a+1 in place
    JOB_MERGE  = 2'd1,  // merge runs [a, a+len) and [b, b+len) into rows from c
    JOB_SELECT = 2'd2   // pick k of deg elements starting at element offset of row a
  } job_kind_e;

  typedef struct packed {
    job_kind_e  kind;
    row_addr_t  row_a;     // SORT / MERGE: run A; SELECT: first row of neighbour list
    row_addr_t  row_b;     // MERGE: run B
    row_addr_t  row_c;     // MERGE / SELECT: first destination row
    row_addr_t  len;       // MERGE: rows per run
    logic [7:0] offset;    // SELECT: element offset of the list inside row_a
    logic [7:0] deg;       // SELECT: neighbours in the window (already capped)
    logic [7:0] k;         // SELECT: samples wanted
    logic [5:0] vid_bits;  // SORT / MERGE: significant bits of each VID
    logic [15:0] seed;     // SELECT: random seed
  } upe_job_t;

  // Element helpers.
  function automatic vid_t elem_dst(elem_t e);
    return e[ELEM_W-1:VID_W];
  endfunction

  function automatic vid_t elem_src(elem_t e);
    return e[VID_W-1:0];
  endfunction

  function automatic elem_t make_elem(vid_t dst, vid_t src);
    return {dst, src};
  endfunction

endpackage
