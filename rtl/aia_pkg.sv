// aia_pkg: types and constants shared by the AIA (Acceleration of Indirect
// memory Access) logic that sits in the base die of each HBM stack.
//
// All addresses are word addresses inside one stack; a word is 32 bits, the
// width of a CSR row pointer or column index. The organisation numbers (6
// stacks, 16 channels of 2 pseudo channels each) follow the H200 memory system
// the design is placed in. Field widths, the tag layout and the word-interleaved
// address map are this design's own choices.
package aia_pkg;

  // Memory organisation of the GPU.
  localparam int unsigned NUM_STACKS = 6;   // HBM stacks on the GPU
  localparam int unsigned NUM_CH     = 16;  // channels per stack (CH0..CH15)
  localparam int unsigned PC_PER_CH  = 2;   // pseudo channels per channel (PC0, PC1)

  // Data path widths.
  localparam int unsigned DATA_W = 32;  // one index / pointer word
  localparam int unsigned ADDR_W = 33;  // word address: 141 GB over 6 stacks needs 33 bits
  localparam int unsigned N_W    = 32;  // width of the N (iteration count) field
  localparam int unsigned R_W    = 8;   // width of the R (range length) field
  localparam int unsigned TAG_W  = 8;   // memory request tag

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [DATA_W-1:0] data_t;
  typedef logic [TAG_W-1:0]  tag_t;

  // One pseudo-channel access. Reads return a mem_rsp_t with the same tag,
  // in request order per pseudo channel; writes return nothing.
  typedef struct packed {
    logic  we;
    addr_t addr;
    data_t wdata;
    tag_t  tag;
  } mem_req_t;

  typedef struct packed {
    data_t rdata;
    tag_t  tag;
  } mem_rsp_t;

  // AIA_range(dst, N, R, a, b): for i in 0..N-1 and r in 0..R-1 return
  // a[b[i] + r], destined for word dst + R*i + r.
  typedef struct packed {
    addr_t          dst;
    logic [N_W-1:0] n;
    logic [R_W-1:0] r;
    addr_t          a;
    addr_t          b;
  } aia_cmd_t;

  // One beat of the bulk response stream.
  typedef struct packed {
    addr_t addr;   // destination word address (dst + R*i + r)
    data_t data;   // a[b[i] + r]
    logic  last;   // final beat of the request
  } aia_out_t;

endpackage
