// tme_monitor -- re-order buffer (ROB) that aggregates reorganized lines.
//
// Every request accepted from the trapper gets the entry at the ROB tail;
// the entry's index is the request_ID that travels with all the work done
// for it. An entry keeps the line address, the configuration ID, the WRAP
// (critical beat), the number of fragments the line needs, a fragment
// counter and the line's data array. Entries are issued to the preparator
// in allocation order, one per cycle. Partial data responses from the fetch
// unit arrive in any order and for any entry: the aligned fragment is merged
// into the entry's line under its byte enables and the counter increments.
// When the oldest entry (the head) has all its fragments, its line goes to
// the trapper and the entry is freed, so lines leave in the order the snoops
// arrived even though fragments complete out of order. With all M_MAX
// entries in use, req_ready is low and the trapper stalls the snoop channel.
//
// Interface: valid/ready request in (from the trapper), valid/ready command
// out (to the preparator), partial responses in (always accepted, one per
// cycle), valid/ready finished line out (to the trapper).
// Timing: a request is written on the handshake edge and can be issued on
// the next cycle. A fragment merged on edge t makes its line available on
// cycle t+1 if it was the last one and its entry is the head.
//
// From the design description: ROB operation, the ID/Wrp/Cnt/Data fields
// per entry, the entry index as request_ID, depth M_MAX and in-order
// release. This implementation's choices: the fragment count a line needs is
// stored with the entry, byte enables place a fragment, and M_MAX = 8.
//
// Lint note: rst_n also drives the disable-iff of the handshake assertions,
// so lint reports it as used both asynchronously and synchronously; the
// logic itself uses it only as an asynchronous reset.
module tme_monitor
  import tme_pkg::*;
#(
  parameter int unsigned M_MAX = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // request from the trapper
  input  logic                     req_valid,
  output logic                     req_ready,
  input  req_cmd_t                 req_cmd,
  input  logic [$clog2(BEATS)-1:0] req_wrap,
  input  logic [7:0]               req_nfrag,
  // command to the preparator
  output logic                     cmd_valid,
  input  logic                     cmd_ready,
  output mon_cmd_t                 cmd,
  // partial data from the fetch unit
  input  logic                     frag_valid,
  input  partial_rsp_t             frag,
  // finished line to the trapper
  output logic                     line_valid,
  input  logic                     line_ready,
  output line_rsp_t                line
);

  localparam int unsigned IW = (M_MAX > 1) ? $clog2(M_MAX) : 1;

  typedef struct packed {
    logic                     busy;
    logic                     issued;
    addr_t                    reorg_addr;
    id_t                      config_id;
    logic [$clog2(BEATS)-1:0] wrap;
    logic [7:0]               need;
    logic [7:0]               cnt;
  } rob_t;

  rob_t              rob  [M_MAX];
  logic [LINE_W-1:0] data [M_MAX];
  logic [IW-1:0]     head, tail, iss;
  logic              full;
  logic              pending;
  logic [IW-1:0]     fidx;

  function automatic logic [IW-1:0] inc(input logic [IW-1:0] p);
    return (32'(p) == M_MAX - 1) ? '0 : p + 1'b1;
  endfunction

  assign full      = rob[tail].busy;
  assign req_ready = !full;
  assign pending   = rob[iss].busy && !rob[iss].issued;
  assign cmd_valid = pending;
  assign cmd.reorg_addr = rob[iss].reorg_addr;
  assign cmd.config_id  = rob[iss].config_id;
  assign cmd.request_id = 8'(iss);

  assign line_valid = rob[head].busy && (rob[head].cnt == rob[head].need);
  assign line.data  = data[head];
  assign line.wrap  = rob[head].wrap;

  assign fidx = frag.request_id[IW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head <= '0;
      tail <= '0;
      iss  <= '0;
      for (int i = 0; i < M_MAX; i++) begin
        rob[i]  <= '0;
        data[i] <= '0;
      end
    end else begin
      if (req_valid && req_ready) begin
        rob[tail].busy       <= 1'b1;
        rob[tail].issued     <= 1'b0;
        rob[tail].reorg_addr <= req_cmd.reorg_addr;
        rob[tail].config_id  <= req_cmd.config_id;
        rob[tail].wrap       <= req_wrap;
        rob[tail].need       <= req_nfrag;
        rob[tail].cnt        <= '0;
        data[tail]           <= '0;
        tail                 <= inc(tail);
      end
      if (cmd_valid && cmd_ready) begin
        rob[iss].issued <= 1'b1;
        iss             <= inc(iss);
      end
      if (frag_valid) begin
        rob[fidx].cnt <= rob[fidx].cnt + 1'b1;
        for (int b = 0; b < FRAG_BYTES; b++)
          if (frag.byte_en[b])
            data[fidx][(frag.word * FRAG_BYTES + b) * 8 +: 8] <= frag.aligned_data[8 * b +: 8];
      end
      if (line_valid && line_ready) begin
        rob[head].busy <= 1'b0;
        head           <= inc(head);
      end
    end
  end

  a_frag_live: assert property (@(posedge clk) disable iff (!rst_n)
                                frag_valid |-> rob[fidx].busy && rob[fidx].issued
                                               && rob[fidx].cnt < rob[fidx].need);
  a_cmd_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               cmd_valid && !cmd_ready |=> cmd_valid && $stable(cmd));

endmodule
