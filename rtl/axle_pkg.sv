// axle_pkg: types and helpers shared by the back-streaming datapath.
//
// Ring indexes. The payload and metadata rings in the host DMA region have
// CAP slots each. Every head and tail index is kept as a ring position with
// a lap bit: a value in [0, 2*CAP). The slot is the position modulo CAP and
// the occupancy is (tail - head) modulo 2*CAP, so a full ring (occupancy
// CAP) and an empty ring (occupancy 0) differ. The paper only requires that
// indexes wrap around and progress monotonically; this encoding is a design
// choice of this implementation.
//
// Metadata record. Its three fields (data offset, data size, payload slot)
// are the ones the paper's flow example prints; their widths are chosen here.
package axle_pkg;

  // Ring position width: enough for [0, 2*CAP) with CAP up to 65536.
  localparam int unsigned PTR_W = 17;
  // Payload slot number width.
  localparam int unsigned SLOT_W = 16;

  typedef logic [PTR_W-1:0] ptr_t;

  typedef struct packed {
    logic [31:0]       data_offset;  // byte offset of the payload in the result region
    logic [15:0]       data_size;    // valid bytes in the payload
    logic [SLOT_W-1:0] p_slot;       // payload ring slot that holds the data
  } meta_t;

  localparam int unsigned META_W = $bits(meta_t);

  // Kinds of CXL.io posted writes issued by the DMA executor.
  typedef enum logic [1:0] {
    DMA_PAYLOAD = 2'd0,  // payload data into payload slot
    DMA_P_TAIL  = 2'd1,  // payload ring tail index word
    DMA_META    = 2'd2,  // metadata record into metadata slot
    DMA_M_TAIL  = 2'd3   // metadata ring tail index word
  } dma_kind_e;

  // Kinds of CXL.mem flow-control stores issued by the host.
  typedef enum logic {
    FC_P_HEAD = 1'b0,    // new payload ring head
    FC_M_HEAD = 1'b1     // new metadata ring head
  } fc_kind_e;

  // Next ring position after p, for a ring of cap slots.
  function automatic ptr_t ptr_inc(ptr_t p, int unsigned cap);
    ptr_inc = (32'(p) == 2*cap - 1) ? '0 : ptr_t'(p + 1'b1);
  endfunction

  // Slot addressed by ring position p.
  function automatic logic [SLOT_W-1:0] ptr_slot(ptr_t p, int unsigned cap);
    ptr_slot = (32'(p) >= cap) ? SLOT_W'(32'(p) - cap) : SLOT_W'(p);
  endfunction

  // Number of occupied slots between head and tail.
  function automatic logic [PTR_W:0] ptr_occ(ptr_t tail, ptr_t head, int unsigned cap);
    ptr_occ = (tail >= head) ? (PTR_W+1)'(tail - head)
                             : (PTR_W+1)'(32'(tail) + 2*cap - 32'(head));
  endfunction

endpackage
