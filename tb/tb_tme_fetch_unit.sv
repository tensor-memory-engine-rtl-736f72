// tb_tme_fetch_unit -- testbench of the fetch unit and aligner.
//
// Random descriptors (element sizes 1/2/4/8, naturally aligned read
// addresses, random write offsets, a distinct request_ID per descriptor)
// are offered to a fetch unit with a 4-entry ID table. tme_mem_model
// answers the reads out of order. Checks: each AR carries the descriptor's
// address, ARLEN 0, ARSIZE log2 s', the fixed ReadNoSnoop attributes and
// an ID not already in flight; each
// partial response carries the element's bytes from memory at the right
// word and byte enables, with zeros elsewhere; every descriptor is answered
// exactly once; the table fills up and stalls the input.
module tb_tme_fetch_unit;
  import tme_pkg::*;
  import tme_tb_pkg::*;

  localparam int L = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready;
  rdg_desc_t in = '0;
  logic m_arvalid, m_arready, m_rvalid, m_rready, m_rlast, frag_valid;
  logic [31:0] m_araddr;
  logic [7:0] m_arid, m_arlen, m_rid;
  logic [2:0] m_arsize;
  logic [1:0] m_arburst, m_rresp;
  logic [3:0] m_arcache, m_arsnoop;
  logic [1:0] m_ardomain, m_arbar;
  logic [BUS_W-1:0] m_rdata;
  partial_rsp_t frag;
  int ooo_count, reads;

  tme_fetch_unit #(.L_MAX(L)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in,
    .m_arvalid, .m_arready, .m_araddr, .m_arid, .m_arlen, .m_arsize, .m_arburst, .m_arcache,
    .m_arsnoop, .m_ardomain, .m_arbar,
    .m_rvalid, .m_rready, .m_rdata, .m_rid, .m_rresp, .m_rlast, .frag_valid, .frag
  );

  tme_mem_model mem (
    .clk, .rst_n, .arvalid(m_arvalid), .arready(m_arready), .araddr(m_araddr), .arid(m_arid),
    .rvalid(m_rvalid), .rready(m_rready), .rdata(m_rdata), .rid(m_rid), .rresp(m_rresp),
    .rlast(m_rlast), .ooo_count, .reads
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  rdg_desc_t pend [int];     // by request_ID
  rdg_desc_t ar_exp[$];      // in issue order
  bit        inflight [int]; // ARIDs in flight
  int        sent = 0, answered = 0, full = 0;
  bit        took = 0;
  localparam int TOTAL = 2000;

  // AR and R observers (sampled just before the edge)
  always @(negedge clk) if (rst_n) begin
    #2;
    if (m_arvalid && m_arready) begin
      rdg_desc_t d;
      d = ar_exp.pop_front();
      check(m_araddr == d.read_addr && m_arlen == 0 && m_arsize == 3'(width_log2(d.width))
            && !inflight.exists(int'(m_arid)) && m_arid < L
            && m_arburst == 2'b01 && m_arcache == 4'b0010 && m_arsnoop == 4'b0000
            && m_ardomain == 2'b11 && m_arbar == 2'b00, "AR fields");
      inflight[int'(m_arid)] = 1;
    end
    if (m_rvalid && m_rready) inflight.delete(int'(m_rid));
    if (frag_valid) begin
      int id;
      id = int'(frag.request_id);
      if (!pend.exists(id)) check(0, "response for nothing");
      else begin
        rdg_desc_t d;
        logic [FRAG_W-1:0] exp_data;
        logic [7:0] exp_be;
        int o;
        d = pend[id];
        pend.delete(id);
        o = d.write_offset % FRAG_BYTES;
        exp_data = '0;
        exp_be = '0;
        for (int b = 0; b < d.width; b++) begin
          exp_data[8 * (o + b) +: 8] = mem_byte(d.read_addr + b);
          exp_be[o + b] = 1'b1;
        end
        check(frag.aligned_data == exp_data && frag.byte_en == exp_be
              && frag.word == 3'(d.write_offset / FRAG_BYTES), $sformatf("fragment %0d", id));
        answered++;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    while (answered < TOTAL) begin
      @(negedge clk);
      if (!in_valid || took) begin
        in_valid = 0;
        if (sent < TOTAL && $urandom % 4 != 0) begin
          int w;
          w = 1 << ($urandom % 4);
          in.width        = 8'(w);
          in.read_addr    = $urandom & ~32'(w - 1);
          in.write_offset = 32'(($urandom % (LINE_BYTES / w)) * w);
          in.request_id   = 8'(sent % 256);
          in_valid = 1;
        end
      end
      #1;
      if (in_valid && !in_ready) full++;
      took = in_valid && in_ready;
      if (took) begin
        pend[int'(in.request_id)] = in;
        ar_exp.push_back(in);
        sent++;
      end
    end
    repeat (5) @(posedge clk);
    $display("answered=%0d full=%0d ooo=%0d", answered, full, ooo_count);
    check(pend.size() == 0, "every descriptor answered once");
    check(full > 0 && ooo_count > 0, "table full and out-of-order responses seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
