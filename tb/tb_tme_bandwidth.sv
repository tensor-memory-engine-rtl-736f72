// tb_tme_bandwidth -- sequential streaming through reorganized layouts with
// every element size, on the whole engine at its default parameters.
//
// A program that reads a large array sequentially, where the array is a
// reorganized view, is the engine's worst case: each 64-byte line costs
// 64 / s' element reads on the memory side. This testbench measures that
// cost. For each element size s' in {1, 2, 4, 8} bytes and for views of 2,
// 3 and 4 dimensions (a full axis reversal, i.e. a transpose, of a 64 x 64,
// 16 x 16 x 16 or 8 x 8 x 8 x 8 tensor), it programs one specification
// through the AXI4-Lite port and snoops LINES consecutive lines back to
// back, with CR and CD always ready. Checks:
//   - every returned beat equals the line computed from the layout formulas
//     (reference in tme_tb_pkg) and CRRESP announces data;
//   - exactly 64 / s' memory reads are issued per line (request
//     multiplication);
//   - a line takes at least 64 / s' cycles on average (the descriptor
//     generator issues one read per cycle);
//   - averaged over the dimension counts, smaller elements cost more cycles
//     per line than larger ones.
// The measured cycles per line are printed for each case. Memory answers
// with the random, out-of-order latency of tme_mem_model (1 to 24 cycles).
// The numbers come from this model, not from a DRAM.
module tb_tme_bandwidth;
  import tme_pkg::*;
  import tme_tb_pkg::*;

  localparam int LINES = 32;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic        cfg_awvalid, cfg_awready, cfg_wvalid, cfg_wready;
  logic [15:0] cfg_awaddr, cfg_araddr;
  logic [31:0] cfg_wdata, cfg_rdata;
  logic [3:0]  cfg_wstrb;
  logic        cfg_bvalid, cfg_bready, cfg_arvalid, cfg_arready, cfg_rvalid, cfg_rready;
  logic [1:0]  cfg_bresp, cfg_rresp;
  logic        ac_valid, ac_ready;
  logic [31:0] ac_addr;
  logic        cr_valid;
  logic [4:0]  cr_resp;
  logic        cd_valid, cd_last;
  logic [BUS_W-1:0] cd_data;
  logic        m_arvalid, m_arready, m_rvalid, m_rready, m_rlast;
  logic [31:0] m_araddr;
  logic [7:0]  m_arid, m_arlen, m_rid;
  logic [2:0]  m_arsize;
  logic [1:0]  m_arburst, m_rresp;
  logic [3:0]  m_arcache, m_arsnoop;
  logic [1:0]  m_ardomain, m_arbar;
  logic [BUS_W-1:0] m_rdata;
  int          ooo_count, mem_reads;

  tme_top dut (
    .clk, .rst_n,
    .cfg_awvalid, .cfg_awready, .cfg_awaddr, .cfg_wvalid, .cfg_wready, .cfg_wdata,
    .cfg_wstrb, .cfg_bvalid, .cfg_bready, .cfg_bresp,
    .cfg_arvalid, .cfg_arready, .cfg_araddr, .cfg_rvalid, .cfg_rready, .cfg_rdata,
    .cfg_rresp,
    .ac_valid, .ac_ready, .ac_addr, .ac_snoop(4'b0001), .ac_prot(3'b000),
    .cr_valid, .cr_ready(1'b1), .cr_resp,
    .cd_valid, .cd_ready(1'b1), .cd_data, .cd_last,
    .m_arvalid, .m_arready, .m_araddr, .m_arid, .m_arlen, .m_arsize, .m_arburst,
    .m_arcache, .m_arsnoop, .m_ardomain, .m_arbar, .m_rvalid, .m_rready, .m_rdata, .m_rid,
    .m_rresp, .m_rlast
  );

  tme_mem_model mem (
    .clk, .rst_n,
    .arvalid(m_arvalid), .arready(m_arready), .araddr(m_araddr), .arid(m_arid),
    .rvalid(m_rvalid), .rready(m_rready), .rdata(m_rdata), .rid(m_rid),
    .rresp(m_rresp), .rlast(m_rlast), .ooo_count, .reads(mem_reads)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg_write(input logic [15:0] addr, input logic [31:0] data);
    cfg_awaddr  <= addr;
    cfg_wdata   <= data;
    cfg_wstrb   <= 4'hF;
    cfg_awvalid <= 1'b1;
    cfg_wvalid  <= 1'b1;
    do @(posedge clk); while (!cfg_awready);
    cfg_awvalid <= 1'b0;
    cfg_wvalid  <= 1'b0;
    cfg_bready  <= 1'b1;
    do @(posedge clk); while (!cfg_bvalid);
    cfg_bready  <= 1'b0;
  endtask

  task automatic program_entry(input cfg_desc_t e);
    cfg_write(16'h00, 32'd0);
    cfg_write(16'h04, e.reorg_base);
    cfg_write(16'h08, e.reorg_size);
    cfg_write(16'h0C, e.target_base);
    cfg_write(16'h10, 32'(e.width));
    for (int i = 0; i < N_MAX; i++) begin
      cfg_write(16'(32 + 16 * i), e.dims[i].start);
      cfg_write(16'(36 + 16 * i), e.dims[i].stride);
      cfg_write(16'(40 + 16 * i), e.dims[i].length);
    end
    cfg_write(16'h00, 32'd1);
  endtask

  // Axis reversal of an nd-dimensional cube of side n stored row-major:
  // the view's fastest dimension i = 0 walks the raw slowest axis, so view
  // dimension i has raw stride n^(nd-1-i) elements.
  function automatic cfg_desc_t reversal(input int width, input int nd);
    cfg_desc_t e;
    int n, st;
    n = (nd == 2) ? 64 : (nd == 3) ? 16 : 8;
    e = blank_desc();
    e.reorg_base  = 32'h6000_0000;
    e.target_base = 32'h0200_0000;
    e.width       = 8'(width);
    e.reorg_size  = 32'(width * 4096);
    for (int i = 0; i < nd; i++) begin
      st = 1;
      for (int j = 0; j < nd - 1 - i; j++) st *= n;
      e.dims[i].start  = 0;
      e.dims[i].stride = 32'(st);
      e.dims[i].length = 32'(n);
    end
    return e;
  endfunction

  // expected lines and snoop data checking
  logic [LINE_W-1:0] exp_line[$];
  int beat_k = 0, lines_done = 0, cr_seen = 0;
  always @(posedge clk) if (rst_n) begin
    if (cr_valid) begin
      check(cr_resp == 5'b00001, "CRRESP announces data");
      cr_seen++;
    end
    if (cd_valid) begin
      if (exp_line.size() == 0) check(0, "unexpected CD beat");
      else begin
        check(cd_data == exp_line[0][BUS_W * beat_k +: BUS_W] && cd_last == (beat_k == BEATS - 1),
              $sformatf("line %0d beat %0d", lines_done, beat_k));
        if (beat_k == BEATS - 1) begin
          beat_k = 0;
          void'(exp_line.pop_front());
          lines_done++;
        end else beat_k++;
      end
    end
  end

  real cpl [4][3];   // cycles per line, by log2 width and dimension count
  initial begin
    cfg_awvalid = 0; cfg_wvalid = 0; cfg_bready = 0; cfg_arvalid = 0; cfg_rready = 0;
    cfg_awaddr = 0; cfg_araddr = 0; cfg_wdata = 0; cfg_wstrb = 0;
    ac_valid = 0; ac_addr = 0;
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);
    for (int lw = 0; lw < 4; lw++)
      for (int nd = 2; nd <= 4; nd++) begin
        cfg_desc_t e;
        longint t0;
        int r0, l0, n;
        e = reversal(1 << lw, nd);
        program_entry(e);
        @(posedge clk);
        r0 = mem_reads;
        l0 = lines_done;
        t0 = cycle;
        for (int k = 0; k < LINES; k++) begin
          logic [31:0] a;
          a = e.reorg_base + 32'(k * LINE_BYTES);
          exp_line.push_back(ref_line(e, a));
          // drive at the falling edge, take the handshake at the next rise
          @(negedge clk);
          ac_addr  = a;
          ac_valid = 1'b1;
          #1;
          while (!ac_ready) begin
            @(negedge clk);
            #1;
          end
          @(posedge clk);
          #1;
          ac_valid = 1'b0;
        end
        n = 0;
        while (lines_done - l0 < LINES && n < 100_000) begin
          @(posedge clk);
          n++;
        end
        cpl[lw][nd - 2] = real'(cycle - t0) / LINES;
        $display("s'=%0d B, %0d dims: %0d lines, %0d reads, %.1f cycles/line",
                 1 << lw, nd, lines_done - l0, mem_reads - r0, cpl[lw][nd - 2]);
        check(lines_done - l0 == LINES, "all lines returned");
        check(mem_reads - r0 == LINES * (LINE_BYTES >> lw), "64/s' reads per line");
        check(cpl[lw][nd - 2] >= real'(LINE_BYTES >> lw), "at most one read per cycle");
        repeat (5) @(posedge clk);
      end
    for (int lw = 0; lw < 3; lw++)
      check(cpl[lw][0] + cpl[lw][1] + cpl[lw][2] > cpl[lw + 1][0] + cpl[lw + 1][1] + cpl[lw + 1][2],
            $sformatf("s'=%0d costs more per line than s'=%0d", 1 << lw, 2 << lw));
    check(cr_seen == 12 * LINES, "one CR response per snoop");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
