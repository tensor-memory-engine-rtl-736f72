// tb_tme_monitor -- testbench of the re-order buffer.
//
// Requests (random line address, config_ID, WRAP and 8/16/32/64 fragments)
// are offered whenever the testbench has some; the preparator side accepts
// commands at random. Every command must carry the request's fields and the
// ROB slot as request_ID, in allocation order. Fragments of all issued
// requests are returned in random order, interleaved across requests. Lines
// must leave in request order with every byte in place and the right WRAP,
// and req_ready must be low exactly when M_MAX lines are outstanding.
// Inputs are driven at the falling edge; handshakes are evaluated just
// before the rising edge that takes them.
module tb_tme_monitor;
  import tme_pkg::*;

  localparam int M = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req_valid = 0, req_ready, cmd_valid, cmd_ready = 0, frag_valid = 0;
  logic line_valid, line_ready = 0;
  req_cmd_t req_cmd = '0;
  logic [1:0] req_wrap = 0;
  logic [7:0] req_nfrag = 8;
  mon_cmd_t cmd;
  partial_rsp_t frag = '0;
  line_rsp_t line;

  tme_monitor #(.M_MAX(M)) dut (
    .clk, .rst_n, .req_valid, .req_ready, .req_cmd, .req_wrap, .req_nfrag,
    .cmd_valid, .cmd_ready, .cmd, .frag_valid, .frag, .line_valid, .line_ready, .line
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct {
    logic [31:0]       addr;
    logic [7:0]        cfg;
    logic [1:0]        wrap;
    int                n;
    int                slot;
    int                seq;
    logic [LINE_W-1:0] data;
  } req_t;

  req_t  reqs[$];        // accepted, line not yet returned (oldest first)
  req_t  to_issue[$];    // accepted, command not yet issued
  int    frag_req[$];    // pending fragments: request sequence number
  int    frag_k[$];      //                    fragment index
  req_t  all[int];
  int    seq_in = 0, slot_in = 0, lines_out = 0, full_seen = 0, ooo = 0;
  localparam int TOTAL = 300;
  bit    took;

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    while (lines_out < TOTAL) begin
      @(negedge clk);
      // ---- drive
      if (took) req_valid = 0;
      if (!req_valid && seq_in < TOTAL && $urandom % 2 == 0) begin
        req_valid = 1;
        req_cmd.reorg_addr = $urandom & ~32'h3F;
        req_cmd.config_id  = 8'($urandom % 8);
        req_wrap  = 2'($urandom);
        req_nfrag = 8'(8 << ($urandom % 4));
      end
      cmd_ready  = ($urandom % 3 != 0);
      line_ready = ($urandom % 3 != 0);
      frag_valid = 0;
      if (frag_req.size() > 0 && $urandom % 4 != 0) begin
        int i, r, k, w;
        i = $urandom % frag_req.size();
        if (i != 0) ooo++;
        r = frag_req[i]; k = frag_k[i];
        frag_req.delete(i); frag_k.delete(i);
        w = 64 / all[r].n;
        frag_valid = 1;
        frag.request_id = 8'(all[r].slot);
        frag.word       = 3'((k * w) / 8);
        frag.byte_en    = 8'(((1 << w) - 1) << ((k * w) % 8));
        frag.aligned_data = '0;
        for (int b = 0; b < w; b++)
          frag.aligned_data[8 * (((k * w) % 8) + b) +: 8] = all[r].data[8 * (k * w + b) +: 8];
      end
      #1;
      // ---- evaluate handshakes of the coming edge
      check(req_ready == (reqs.size() < M), "req_ready reflects ROB occupancy");
      if (req_valid && !req_ready) full_seen++;
      took = req_valid && req_ready;
      if (took) begin
        req_t q;
        q.addr = req_cmd.reorg_addr; q.cfg = req_cmd.config_id; q.wrap = req_wrap;
        q.n = req_nfrag; q.slot = slot_in; q.seq = seq_in;
        for (int w = 0; w < LINE_W / 32; w++) q.data[32 * w +: 32] = $urandom;
        all[seq_in] = q;
        reqs.push_back(q);
        to_issue.push_back(q);
        slot_in = (slot_in + 1) % M;
        seq_in++;
      end
      if (cmd_valid && cmd_ready) begin
        if (to_issue.size() == 0) check(0, "command without request");
        else begin
          req_t q;
          q = to_issue.pop_front();
          check(cmd.reorg_addr == q.addr && cmd.config_id == q.cfg
                && cmd.request_id == 8'(q.slot), "command fields");
          for (int k = 0; k < q.n; k++) begin frag_req.push_back(q.seq); frag_k.push_back(k); end
        end
      end
      if (line_valid && line_ready) begin
        req_t q;
        q = reqs.pop_front();
        check(line.data == q.data && line.wrap == q.wrap, $sformatf("line %0d", lines_out));
        lines_out++;
      end
      @(posedge clk);
    end
    $display("full=%0d out_of_order_frags=%0d", full_seen, ooo);
    check(full_seen > 0 && ooo > 0, "ROB full and out-of-order fragments seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
