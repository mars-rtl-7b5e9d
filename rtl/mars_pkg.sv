// mars_pkg: types and constants shared by the MARS request reorderer.
//
// A memory request is carried as one packed struct (mars_req_t): its
// physical byte address, a read/write flag and a requester tag. The physical
// page that MARS groups requests by is the address with its low 12 bits
// dropped (4 KB pages, as the MARS scheme defines a page). The address width
// and the tag width are this design's own choices; write data is assumed to
// travel beside the request (matched by the tag) rather than through the
// reorder buffer.
package mars_pkg;

  // Physical address width (own choice; the scheme needs no particular width).
  parameter int unsigned ADDR_W = 48;
  // 4 KB physical page: the page number is addr[ADDR_W-1:PAGE_SHIFT].
  parameter int unsigned PAGE_SHIFT = 12;
  parameter int unsigned PAGE_W = ADDR_W - PAGE_SHIFT;
  // Requester tag width (own choice).
  parameter int unsigned ID_W = 8;

  typedef logic [PAGE_W-1:0] page_t;

  // Request packet as it leaves the GPU and as it is forwarded to memory.
  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    logic              write;   // 1 = write, 0 = read
    logic [ID_W-1:0]   id;
  } mars_req_t;

  parameter int unsigned REQ_W = $bits(mars_req_t);

  function automatic page_t page_of(input mars_req_t r);
    return r.addr[ADDR_W-1:PAGE_SHIFT];
  endfunction

endpackage
