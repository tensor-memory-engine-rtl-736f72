// tme_mem_model -- behavioural AXI read memory for the TME testbenches.
//
// Stands in for the platform's DRAM controller and interconnect, which are
// not part of the design. It accepts AXI read addresses (single beat) with
// ARREADY dropping at random, holds up to QMAX reads, and answers each after
// a random latency of 1 to MAX_LAT cycles, picking at random among the reads
// that are due, so responses come back out of order. The data of a beat is
// the 16-byte aligned block that holds ARADDR, byte j being
// tme_tb_pkg::mem_byte(block address + j).
// ooo_count counts responses returned ahead of an older outstanding read.
module tme_mem_model
  import tme_pkg::*;
  import tme_tb_pkg::*;
#(
  parameter int QMAX    = 32,
  parameter int MAX_LAT = 24
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             arvalid,
  output logic             arready,
  input  logic [31:0]      araddr,
  input  logic [7:0]       arid,
  output logic             rvalid,
  input  logic             rready,
  output logic [BUS_W-1:0] rdata,
  output logic [7:0]       rid,
  output logic [1:0]       rresp,
  output logic             rlast,
  output int               ooo_count,
  output int               reads
);

  typedef struct {
    logic [31:0] addr;
    logic [7:0]  id;
    longint      due;
    longint      seq;
  } pend_t;

  pend_t  q[$];
  longint now;
  longint seq;
  int     sel;

  function automatic logic [BUS_W-1:0] beat(input logic [31:0] a);
    logic [BUS_W-1:0] d;
    for (int j = 0; j < BUS_BYTES; j++)
      d[8*j +: 8] = mem_byte({a[31:4], 4'd0} + 32'(j));
    return d;
  endfunction

  assign rresp = 2'b00;
  assign rlast = 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      arready   <= 1'b0;
      rvalid    <= 1'b0;
      rdata     <= '0;
      rid       <= '0;
      now       <= 0;
      seq       <= 0;
      ooo_count <= 0;
      reads     <= 0;
      q.delete();
    end else begin
      now <= now + 1;
      if (arvalid && arready) begin
        q.push_back('{addr: araddr, id: arid, due: now + 1 + longint'($urandom % 32'(MAX_LAT)), seq: seq});
        seq   <= seq + 1;
        reads <= reads + 1;
      end
      arready <= (q.size() < QMAX - 1) && ($urandom % 4 != 0);
      if (!rvalid || rready) begin
        rvalid <= 1'b0;
        sel = -1;
        for (int i = 0; i < q.size(); i++)
          if (q[i].due <= now && (sel < 0 || $urandom % 2 == 0)) sel = i;
        if (sel >= 0) begin
          rvalid <= 1'b1;
          rdata  <= beat(q[sel].addr);
          rid    <= q[sel].id;
          for (int i = 0; i < q.size(); i++)
            if (q[i].seq < q[sel].seq) begin
              ooo_count <= ooo_count + 1;
              break;
            end
          q.delete(sel);
        end
      end
    end
  end

endmodule
