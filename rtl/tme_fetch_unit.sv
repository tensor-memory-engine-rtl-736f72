// tme_fetch_unit -- Fetch Unit and Aligner.
//
// Each RDG descriptor becomes one single-beat, non-cached read of s' bytes
// on the read channels of the engine's ACE port (ARLEN = 0, ARSIZE =
// log2 s', ARCACHE = 0010, ReadNoSnoop: ARSNOOP = 0000, ARDOMAIN = 11
// (system), ARBAR = 00). Before the read is issued,
// the descriptor is stored in a transaction-ID allocation table of L_MAX
// entries and the entry's index is used as ARID. The memory may answer in
// any order: a response's RID selects the table entry, whose read address
// gives the byte lane of the element in the BUS_W-bit read data and whose
// write offset gives the element's place in the reorganized line. The
// aligner isolates the s' bytes of the element, shifts them to their byte
// position within a 64-bit word of the line, and hands the monitor the
// aligned word together with request_ID, word index and byte enables. The
// entry is then freed. With all L_MAX entries in flight no new read is
// issued and the RDG stalls.
//
// Interface: valid/ready descriptor stream in; AXI read address and read
// data channels out to memory (RREADY is always high); partial responses out
// to the monitor (no back-pressure: the monitor takes one per cycle).
// Timing: a descriptor taken on edge t is on AR from cycle t+1 (registered
// AR). A read response on edge t gives a partial response on cycle t+1. One
// descriptor and one response can be handled per cycle.
//
// From the design description: descriptor-to-AXI translation, the ID
// allocation table of depth L_MAX, out-of-order responses, isolation and
// alignment. This implementation's choices: L_MAX = 16, a 128-bit read data
// bus, single-beat ReadNoSnoop reads at the element's own size, lowest-free-entry
// allocation and the partial-response fields word/byte_en.
//
// Lint note: rst_n also drives the disable-iff of the handshake assertions,
// so lint reports it as used both asynchronously and synchronously; the
// logic itself uses it only as an asynchronous reset.
// Only the low 64 bits of the shifted read beat can hold an element (s'
// is at most 8 bytes), so lint reports its upper bits as unused.
module tme_fetch_unit
  import tme_pkg::*;
#(
  parameter int unsigned L_MAX = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  // descriptors from the RDG
  input  logic               in_valid,
  output logic               in_ready,
  input  rdg_desc_t          in,
  // AXI read address channel
  output logic               m_arvalid,
  input  logic               m_arready,
  output addr_t              m_araddr,
  output logic [7:0]         m_arid,
  output logic [7:0]         m_arlen,
  output logic [2:0]         m_arsize,
  output logic [1:0]         m_arburst,
  output logic [3:0]         m_arcache,
  output logic [3:0]         m_arsnoop,
  output logic [1:0]         m_ardomain,
  output logic [1:0]         m_arbar,
  // AXI read data channel
  input  logic               m_rvalid,
  output logic               m_rready,
  input  logic [BUS_W-1:0]   m_rdata,
  input  logic [7:0]         m_rid,
  input  logic [1:0]         m_rresp,
  input  logic               m_rlast,
  // aligned fragments to the monitor
  output logic               frag_valid,
  output partial_rsp_t       frag
);

  localparam int unsigned TW = (L_MAX > 1) ? $clog2(L_MAX) : 1;
  localparam int unsigned LW = $clog2(BUS_BYTES);
  localparam int unsigned FW = $clog2(FRAG_BYTES);

  // Allocation table.
  logic [L_MAX-1:0] busy;
  rdg_desc_t        meta [L_MAX];
  logic             has_free;
  logic [TW-1:0]    free_idx;

  always_comb begin
    has_free = 1'b0;
    free_idx = '0;
    for (int i = L_MAX - 1; i >= 0; i--) begin
      if (!busy[i]) begin
        has_free = 1'b1;
        free_idx = TW'(i);
      end
    end
  end

  logic take;
  assign in_ready = has_free && (!m_arvalid || m_arready);
  assign take     = in_valid && in_ready;

  // Response side.
  logic [TW-1:0] rid;
  rdg_desc_t     rmeta;
  logic          rfire;
  assign m_rready = 1'b1;
  assign rid      = m_rid[TW-1:0];
  assign rmeta    = meta[rid];
  assign rfire    = m_rvalid && m_rready;

  logic [BUS_W-1:0]  shifted;
  logic [FRAG_W-1:0] isolated;
  logic [FRAG_W-1:0] emask;
  logic [FW-1:0]     dst;
  always_comb begin
    shifted  = m_rdata >> (8 * rmeta.read_addr[LW-1:0]);
    emask    = (FRAG_W'(1) << (8 * rmeta.width)) - 1'b1;
    if (rmeta.width >= 8'(FRAG_BYTES)) emask = '1;
    isolated = shifted[FRAG_W-1:0] & emask;
    dst      = rmeta.write_offset[FW-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= '0;
      m_arvalid  <= 1'b0;
      m_araddr   <= '0;
      m_arid     <= '0;
      m_arsize   <= '0;
      frag_valid <= 1'b0;
      frag       <= '0;
      for (int i = 0; i < L_MAX; i++) meta[i] <= '0;
    end else begin
      // issue
      if (take) begin
        busy[free_idx] <= 1'b1;
        meta[free_idx] <= in;
        m_arvalid      <= 1'b1;
        m_araddr       <= in.read_addr;
        m_arid         <= 8'(free_idx);
        m_arsize       <= {1'b0, width_log2(in.width)};
      end else if (m_arready) begin
        m_arvalid <= 1'b0;
      end
      // retire and align
      frag_valid <= rfire;
      if (rfire) begin
        busy[rid]         <= 1'b0;
        frag.aligned_data <= isolated << (8 * dst);
        frag.request_id   <= rmeta.request_id;
        frag.word         <= rmeta.write_offset[FW +: $clog2(WORDS)];
        frag.byte_en      <= FRAG_BYTES'(((16'(1) << rmeta.width) - 1'b1) << dst);
      end
    end
  end

  assign m_arlen   = 8'd0;
  assign m_arburst = 2'b01;
  assign m_arcache = 4'b0010;
  assign m_arsnoop  = 4'b0000;  // ReadNoSnoop
  assign m_ardomain = 2'b11;    // system domain (non-cached)
  assign m_arbar    = 2'b00;    // normal access, no barrier

  logic unused_r;
  assign unused_r = ^{m_rresp, m_rlast, m_rid[7:TW]};

  a_ar_hold: assert property (@(posedge clk) disable iff (!rst_n)
                              m_arvalid && !m_arready |=> m_arvalid && $stable(m_araddr)
                                                          && $stable(m_arid));
  a_rid_live: assert property (@(posedge clk) disable iff (!rst_n)
                               m_rvalid |-> busy[rid]);

endmodule
