// tme_pkg -- types and constants shared by the Tensor Memory Engine (TME).
//
// The TME serves cache-line reads that target a "reorganized" view of a
// dense tensor. Each view is described by an access-pattern specification:
// a base address in the reorganized space, a base address of the raw tensor,
// an element size and, per dimension i, a triple (start omega_i, stride
// sigma_i, length w_i). The structs below carry that specification and the
// commands that flow between the TME stages:
//
//   trapper -> monitor      : req_cmd_t       (reorg_addr, config_ID)
//   monitor -> preparator   : mon_cmd_t       (reorg_addr, config_ID, request_ID)
//   preparator -> RDG       : rdg_in_t        (lengths/starts/limits/coords,
//                                              request_ID, width, target_addr)
//   RDG -> fetch unit       : rdg_desc_t      (read_addr, write_offset,
//                                              request_ID, width)
//   fetch unit -> monitor   : partial_rsp_t   (aligned_data, request_ID, ...)
//
// The field names and C widths (uint32_t / uint8_t / uint64_t) of these
// structs follow the block diagram of the design. The number of dimensions
// (N_MAX), the cache-line size and the bus widths are this implementation's
// choices except for the 64-byte line, which is the one the design targets.
package tme_pkg;

  // Number of dimensions a specification may use (N_max). Unused dimensions
  // are programmed as (start 0, stride 0, length 1), which leaves the
  // address untouched.
  localparam int unsigned N_MAX      = 8;
  // Cache line size s in bytes.
  localparam int unsigned LINE_BYTES = 64;
  localparam int unsigned LINE_W     = LINE_BYTES * 8;
  // Data width of the coherent snoop-data channel and of the memory read
  // channel (128 bits, i.e. 4 beats per cache line).
  localparam int unsigned BUS_BYTES  = 16;
  localparam int unsigned BUS_W      = BUS_BYTES * 8;
  localparam int unsigned BEATS      = LINE_BYTES / BUS_BYTES;
  // Width of the aligned fragment handed back to the monitor (uint64_t).
  localparam int unsigned FRAG_BYTES = 8;
  localparam int unsigned FRAG_W     = FRAG_BYTES * 8;
  localparam int unsigned WORDS      = LINE_BYTES / FRAG_BYTES;

  typedef logic [31:0] addr_t;
  typedef logic [7:0]  id_t;

  // One dimension of an access-pattern specification.
  typedef struct packed {
    logic [31:0] start;   // omega_i: initial offset, in elements
    logic [31:0] stride;  // sigma_i: increment, in elements
    logic [31:0] length;  // w_i: number of positions along the dimension
  } dim_t;

  // One entry of the descriptor array.
  typedef struct packed {
    addr_t              reorg_base;  // a: base of the reorganized object
    addr_t              reorg_size;  // bytes covered by the reorganized object
    addr_t              target_base; // b: base of the raw (non-reorganized) tensor
    logic [7:0]         width;       // s': element size in bytes (1, 2, 4 or 8)
    dim_t [N_MAX-1:0]   dims;
  } cfg_desc_t;

  // Trapper -> monitor ("Request command").
  typedef struct packed {
    addr_t reorg_addr;
    id_t   config_id;
  } req_cmd_t;

  // Monitor -> preparator ("Monitor command").
  typedef struct packed {
    addr_t reorg_addr;
    id_t   config_id;
    id_t   request_id;
  } mon_cmd_t;

  // Preparator -> RDG ("Input").
  typedef struct packed {
    logic [N_MAX-1:0][31:0] lengths;  // sigma_i (stride of dimension i)
    logic [N_MAX-1:0][31:0] starts;   // omega_i
    logic [N_MAX-1:0][31:0] limits;   // omega_i + w_i, where c_i wraps back
    logic [N_MAX-1:0][31:0] coords;   // c_i of the first element of the line
    id_t                    request_id;
    logic [7:0]             width;
    addr_t                  target_addr;
  } rdg_in_t;

  // RDG -> fetch unit ("RDG Descriptor").
  typedef struct packed {
    addr_t      read_addr;     // byte address of the element in raw memory
    logic [31:0] write_offset; // byte offset of the element in the new line
    id_t        request_id;
    logic [7:0] width;
  } rdg_desc_t;

  // Fetch unit -> monitor ("Partial data response"). word and byte_en say
  // where in the line the aligned fragment belongs.
  typedef struct packed {
    logic [FRAG_W-1:0]          aligned_data;
    id_t                        request_id;
    logic [$clog2(WORDS)-1:0]   word;
    logic [FRAG_BYTES-1:0]      byte_en;
  } partial_rsp_t;

  // Monitor -> trapper: a finished line.
  typedef struct packed {
    logic [LINE_W-1:0]              data;
    logic [$clog2(BEATS)-1:0]       wrap;   // first beat (critical word)
  } line_rsp_t;

  // ACE CRRESP bits used by the trapper.
  localparam int unsigned CR_DATA_TRANSFER = 0;

  // log2 of an element size of 1, 2, 4 or 8 bytes.
  function automatic logic [1:0] width_log2(input logic [7:0] w);
    case (w)
      8'd2:    return 2'd1;
      8'd4:    return 2'd2;
      8'd8:    return 2'd3;
      default: return 2'd0;
    endcase
  endfunction

endpackage
