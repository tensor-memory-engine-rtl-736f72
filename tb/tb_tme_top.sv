// tb_tme_top -- end-to-end testbench of the Tensor Memory Engine at its
// default parameters.
//
// The testbench plays the processor side: it programs specifications over
// the AXI4-Lite port, reads some back, and issues snoops on the ACE AC
// channel with random CRREADY/CDREADY back-pressure. tme_mem_model serves
// the engine's element reads with random, out-of-order latency. Every snoop
// response is checked against a model of the range table (hit or snoop
// miss), and every line returned on CD is checked beat by beat, in wrap
// order, against tme_tb_pkg::ref_line, which evaluates the dimension
// formulas element by element.
//
// Phases:
//   1. The four specifications of the worked 4 x 5 matrix example (linear,
//      transpose, inner 2 x 3, inner transpose) with int32 elements; the
//      first elements of each line are also checked against the element
//      lists given with the example.
//   2. Register read-back.
//   3. Random specifications (1 to N_MAX dimensions, 1/2/4/8-byte elements)
//      in every entry, a mix of hits and misses, and a burst of snoops that
//      fills the re-order buffer.
//   4. The evaluated workloads (MatMul transpose, Im2col, Conv2D,
//      Permutation, Unfold, Batch2Space, Slicing) at their full tensor sizes;
//      a sample of lines of each reorganized view is read.
// Each mechanism of the engine is counted and must occur at least once:
// snoop hit, snoop miss, ROB full, fetch table full, out-of-order memory
// response, non-zero WRAP, dimension carry in the RDG, CD back-pressure,
// each element size, entry invalidation.
module tb_tme_top;
  import tme_pkg::*;
  import tme_tb_pkg::*;

  localparam int D = 8;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // ------------------------------------------------------------ DUT wiring
  logic        cfg_awvalid, cfg_awready, cfg_wvalid, cfg_wready;
  logic [15:0] cfg_awaddr, cfg_araddr;
  logic [31:0] cfg_wdata, cfg_rdata;
  logic [3:0]  cfg_wstrb;
  logic        cfg_bvalid, cfg_bready, cfg_arvalid, cfg_arready, cfg_rvalid, cfg_rready;
  logic [1:0]  cfg_bresp, cfg_rresp;
  logic        ac_valid, ac_ready;
  logic [31:0] ac_addr;
  logic        cr_valid, cr_ready;
  logic [4:0]  cr_resp;
  logic        cd_valid, cd_ready, cd_last;
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
    .cr_valid, .cr_ready, .cr_resp,
    .cd_valid, .cd_ready, .cd_data, .cd_last,
    .m_arvalid, .m_arready, .m_araddr, .m_arid, .m_arlen, .m_arsize, .m_arburst,
    .m_arcache, .m_arsnoop, .m_ardomain, .m_arbar, .m_rvalid, .m_rready, .m_rdata, .m_rid, .m_rresp, .m_rlast
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

  // -------------------------------------------------------------- watchdog
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ----------------------------------------------------- AXI4-Lite driver
  task automatic cfg_write(input logic [15:0] addr, input logic [31:0] data);
    cfg_awaddr  <= addr;
    cfg_wdata   <= data;
    cfg_wstrb   <= 4'hF;
    cfg_awvalid <= 1'b1;
    cfg_wvalid  <= 1'b1;
    do @(posedge clk); while (!(cfg_awready));
    cfg_awvalid <= 1'b0;
    cfg_wvalid  <= 1'b0;
    cfg_bready  <= 1'b1;
    do @(posedge clk); while (!cfg_bvalid);
    cfg_bready  <= 1'b0;
  endtask

  task automatic cfg_read(input logic [15:0] addr, output logic [31:0] data);
    cfg_araddr  <= addr;
    cfg_arvalid <= 1'b1;
    do @(posedge clk); while (!cfg_arready);
    cfg_arvalid <= 1'b0;
    cfg_rready  <= 1'b1;
    do @(posedge clk); while (!cfg_rvalid);
    data = cfg_rdata;
    cfg_rready  <= 1'b0;
  endtask

  // Model of the configuration arrays, kept in step with what is written.
  cfg_desc_t    model  [D];
  logic [D-1:0] mvalid = '0;
  int           invalidations = 0;

  task automatic program_entry(input int ent, input cfg_desc_t e);
    logic [15:0] b;
    b = 16'(ent * 256);
    if (mvalid[ent]) invalidations++;
    cfg_write(b + 16'h00, 32'd0);
    mvalid[ent] = 1'b0;
    cfg_write(b + 16'h04, e.reorg_base);
    cfg_write(b + 16'h08, e.reorg_size);
    cfg_write(b + 16'h0C, e.target_base);
    cfg_write(b + 16'h10, 32'(e.width));
    for (int i = 0; i < N_MAX; i++) begin
      cfg_write(b + 16'(32 + 16 * i), e.dims[i].start);
      cfg_write(b + 16'(36 + 16 * i), e.dims[i].stride);
      cfg_write(b + 16'(40 + 16 * i), e.dims[i].length);
    end
    cfg_write(b + 16'h00, 32'd1);
    model[ent]  = e;
    mvalid[ent] = 1'b1;
  endtask

  task automatic invalidate_all();
    for (int ent = 0; ent < D; ent++)
      if (mvalid[ent]) begin
        cfg_write(16'(ent * 256), 32'd0);
        mvalid[ent] = 1'b0;
        invalidations++;
      end
  endtask

  // ----------------------------------------------------- snoop machinery
  logic [31:0]       snq[$];
  bit                exp_cr[$];
  logic [LINE_W-1:0] exp_line[$];
  logic [1:0]        exp_wrap[$];
  int                hits = 0, misses = 0, wrapped = 0;
  int                width_seen[9];
  bit                stall_enable = 1'b1;

  function automatic int lookup(input logic [31:0] a);
    for (int e = 0; e < D; e++)
      if (mvalid[e] && a >= model[e].reorg_base && a - model[e].reorg_base < model[e].reorg_size)
        return e;
    return -1;
  endfunction

  always @(posedge clk) begin
    if (!rst_n) begin
      ac_valid <= 1'b0;
      ac_addr  <= '0;
    end else begin
      if (ac_valid && ac_ready) begin
        int e;
        e = lookup(ac_addr);
        exp_cr.push_back(e >= 0);
        if (e >= 0) begin
          hits++;
          exp_line.push_back(ref_line(model[e], ac_addr));
          exp_wrap.push_back(ac_addr[5:4]);
          if (ac_addr[5:4] != 0) wrapped++;
          width_seen[4'(model[e].width)]++;
        end else begin
          misses++;
        end
      end
      if (!ac_valid || ac_ready) begin
        ac_valid <= 1'b0;
        if (snq.size() > 0 && (!stall_enable || $urandom % 3 != 0)) begin
          ac_addr  <= snq.pop_front();
          ac_valid <= 1'b1;
        end
      end
    end
  end

  always @(posedge clk) begin
    cr_ready <= !stall_enable || ($urandom % 4 != 0);
    cd_ready <= !stall_enable || ($urandom % 4 != 0);
  end

  always @(posedge clk) begin
    if (rst_n && cr_valid && cr_ready) begin
      if (exp_cr.size() == 0) check(0, "unexpected CR response");
      else begin
        bit h;
        h = exp_cr.pop_front();
        check(cr_resp == (h ? 5'b00001 : 5'b00000), $sformatf("CRRESP %b, hit=%0d", cr_resp, h));
      end
    end
  end

  int beat_k = 0;
  int lines_done = 0;
  always @(posedge clk) begin
    if (rst_n && cd_valid && cd_ready) begin
      if (exp_line.size() == 0) check(0, "unexpected CD beat");
      else begin
        int idx;
        idx = (int'(exp_wrap[0]) + beat_k) % BEATS;
        check(cd_data == exp_line[0][BUS_W * idx +: BUS_W],
              $sformatf("line %0d beat %0d data", lines_done, beat_k));
        check(cd_last == (beat_k == BEATS - 1), "CDLAST");
        if (beat_k == BEATS - 1) begin
          beat_k = 0;
          void'(exp_line.pop_front());
          void'(exp_wrap.pop_front());
          lines_done++;
        end else beat_k++;
      end
    end
  end

  // mechanism counters observed inside the engine
  int rob_full = 0, fetch_full = 0, cd_bp = 0, dim_carry = 0;
  always @(posedge clk) if (rst_n) begin
    if (ac_valid && !ac_ready && dut.u_monitor.full) rob_full++;
    if (dut.u_fetch.in_valid && !dut.u_fetch.has_free) fetch_full++;
    if (cd_valid && !cd_ready) cd_bp++;
    if (dut.u_rdg.busy && dut.u_rdg.out_ready && !dut.u_rdg.last
        && dut.u_rdg.nxt[1] != dut.u_rdg.cur.coords[1]) dim_carry++;
  end

  task automatic drain();
    int guard;
    guard = 0;
    while ((snq.size() > 0 || exp_cr.size() > 0 || exp_line.size() > 0 || ac_valid)
           && guard < 1_000_000) begin
      @(posedge clk);
      guard++;
    end
    repeat (5) @(posedge clk);
  endtask

  // A line of the example must start with these element indices of the
  // 4 x 5 int32 matrix stored at b.
  task automatic check_example(input logic [31:0] a, input cfg_desc_t e,
                               input int idx [], input string name);
    logic [LINE_W-1:0] l;
    l = ref_line(e, a);
    for (int k = 0; k < idx.size(); k++)
      check(l[k * 32 +: 32] == {mem_byte(e.target_base + 32'(4 * idx[k]) + 3),
                                mem_byte(e.target_base + 32'(4 * idx[k]) + 2),
                                mem_byte(e.target_base + 32'(4 * idx[k]) + 1),
                                mem_byte(e.target_base + 32'(4 * idx[k]))},
            $sformatf("%s element %0d", name, k));
  endtask

  function automatic cfg_desc_t mk(input logic [31:0] a, input logic [31:0] size,
                                   input logic [31:0] b, input int width,
                                   input int spec [][3]);
    // spec lists (omega, sigma, w) from the innermost dimension outwards
    cfg_desc_t e;
    e = blank_desc();
    e.reorg_base  = a;
    e.reorg_size  = size;
    e.target_base = b;
    e.width       = 8'(width);
    foreach (spec[i]) begin
      e.dims[i].start  = spec[i][0];
      e.dims[i].stride = spec[i][1];
      e.dims[i].length = spec[i][2];
    end
    return e;
  endfunction

  function automatic cfg_desc_t rand_desc(input int ent);
    cfg_desc_t e;
    int nd;
    e = blank_desc();
    e.reorg_base  = 32'h8000_0000 + 32'(ent) * 32'h0010_0000;
    e.reorg_size  = 32'h0000_4000;
    e.target_base = 32'h1000_0000 + 32'($urandom % 4096) * 32'd8;
    e.width       = 8'(1 << ($urandom % 4));
    nd = 1 + $urandom % N_MAX;
    for (int i = 0; i < nd; i++) begin
      e.dims[i].length = 1 + $urandom % 6;
      e.dims[i].start  = $urandom % 3;
      e.dims[i].stride = $urandom % 300;
    end
    return e;
  endfunction

  logic [31:0] rd;
  int  wl_lines;
  initial begin
    cfg_awvalid = 0; cfg_wvalid = 0; cfg_bready = 0; cfg_arvalid = 0; cfg_rready = 0;
    cfg_awaddr = 0; cfg_araddr = 0; cfg_wdata = 0; cfg_wstrb = 0;
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);

    // ---------------- phase 1: worked example, 4 x 5 int32 matrix at b
    begin
      cfg_desc_t c1, c2, c3, c4;
      logic [31:0] b;
      b  = 32'h0100_0000;
      c1 = mk(32'h2000_0000, 32'h1000, b, 4, '{'{0, 1, 20}});
      c2 = mk(32'h2001_0000, 32'h1000, b, 4, '{'{0, 5, 4}, '{0, 1, 4}});
      c3 = mk(32'h2002_0000, 32'h1000, b, 4, '{'{0, 1, 3}, '{0, 5, 2}, '{1, 1, 1}, '{1, 5, 1}});
      c4 = mk(32'h2003_0000, 32'h1000, b, 4, '{'{0, 5, 2}, '{0, 1, 3}, '{1, 1, 1}, '{1, 5, 1}});
      program_entry(0, c1); program_entry(1, c2); program_entry(2, c3); program_entry(3, c4);
      check_example(32'h2000_0000, c1, '{0, 1, 2, 3}, "C1");
      check_example(32'h2001_0000, c2, '{0, 5, 10, 15, 1, 6, 11, 16}, "C2");
      check_example(32'h2002_0000, c3, '{6, 7, 8, 11}, "C3");
      check_example(32'h2003_0000, c4, '{6, 11, 7, 12}, "C4");
      snq.push_back(32'h2000_0000); snq.push_back(32'h2001_0000);
      snq.push_back(32'h2002_0010); snq.push_back(32'h2003_0030);
      snq.push_back(32'h3000_0000);               // outside every range
      drain();
      check(lines_done == 4, "four example lines returned");
    end

    // ---------------- phase 2: register read-back
    cfg_read(16'h0104, rd); check(rd == 32'h2001_0000, "readback REORG_BASE");
    cfg_read(16'h0134, rd); check(rd == 32'd1,         "readback STRIDE dim1");
    cfg_read(16'h0228, rd); check(rd == 32'd3,         "readback LENGTH dim0");
    cfg_read(16'h0300, rd); check(rd == 32'd1,         "readback CTRL");
    cfg_read(16'h0400, rd); check(rd == 32'd0,         "readback CTRL of unused entry");

    // ---------------- phase 3: random specifications and traffic
    for (int round = 0; round < 3; round++) begin
      for (int ent = 0; ent < D; ent++) program_entry(ent, rand_desc(ent));
      for (int n = 0; n < 150; n++) begin
        int ent;
        ent = $urandom % (D + 2);
        if (ent >= D) snq.push_back(32'h6000_0000 + ($urandom % 32'h0100_0000));
        else          snq.push_back(model[ent].reorg_base + ($urandom % model[ent].reorg_size));
      end
      drain();
    end
    // back-to-back 1-byte lines with no back-pressure: fills the ROB
    stall_enable = 1'b0;
    begin
      cfg_desc_t e;
      e = rand_desc(0);
      e.width = 1;
      program_entry(0, e);
      for (int n = 0; n < 40; n++) snq.push_back(e.reorg_base + 32'(64 * n + 16 * (n % 4)));
      drain();
    end
    stall_enable = 1'b1;

    // ---------------- phase 4: evaluated workloads, full tensor sizes
    invalidate_all();
    begin
      cfg_desc_t w [7];
      // MatMul: 2048 x 2048 fp32, second operand read transposed
      w[0] = mk(32'h8000_0000, 32'd2048 * 2048 * 4, 32'h0000_0000, 4,
                '{'{0, 2048, 2048}, '{0, 1, 2048}});
      // Im2col: 1024 x 1024 uint8 image, 2 x 2 filter, one patch per row
      w[1] = mk(32'h8400_0000, 32'd1023 * 1023 * 4, 32'h0400_0000, 1,
                '{'{0, 1, 2}, '{0, 1024, 2}, '{0, 1, 1023}, '{0, 1024, 1023}});
      // Conv2D: the same flattened 2 x 2 window view of a 1024 x 1024 image
      w[2] = mk(32'h8800_0000, 32'd1023 * 1023 * 4, 32'h0500_0000, 1,
                '{'{0, 1, 2}, '{0, 1024, 2}, '{0, 1, 1023}, '{0, 1024, 1023}});
      // Permutation: (N,H,W,C) = (8,512,512,3) uint8 seen as (N,C,H,W)
      w[3] = mk(32'h8C00_0000, 32'd8 * 3 * 512 * 512, 32'h0600_0000, 1,
                '{'{0, 3, 512}, '{0, 1536, 512}, '{0, 1, 3}, '{0, 786432, 8}});
      // Unfold: 8 x 64 x 64 x 128 fp32, mode-3 unfolding to 64 x 65536
      w[4] = mk(32'h9000_0000, 32'd64 * 65536 * 4, 32'h0800_0000, 4,
                '{'{0, 524288, 8}, '{0, 8192, 64}, '{0, 1, 128}, '{0, 128, 64}});
      // Batch2Space: (8,64,64,3) uint8 batch laid out as one 128 x 256 x 3 image
      w[5] = mk(32'h9400_0000, 32'd128 * 256 * 3, 32'h0C00_0000, 1,
                '{'{0, 1, 3}, '{0, 3, 64}, '{0, 12288, 4}, '{0, 192, 64}, '{0, 49152, 2}});
      // Slicing: 64 x 64 x 64 x 512 fp32, strides (2,4,2,64) -> 32 x 16 x 32 x 8
      w[6] = mk(32'h9800_0000, 32'd32 * 16 * 32 * 8 * 4, 32'h1000_0000, 4,
                '{'{0, 64, 8}, '{0, 1024, 32}, '{0, 131072, 16}, '{0, 4194304, 32}});
      for (int i = 0; i < 7; i++) program_entry(i, w[i]);
      // spot check of one element per view against the plain index formula
      // (row-major tensors; element k of the view)
      check(ref_elem_addr(w[0], 32'd2048 * 5 + 7) == 32'h0000_0000 + 4 * (7 * 2048 + 5),
            "MatMul B^T(5,7) = B(7,5)");
      check(ref_elem_addr(w[1], (32'd1023 * 10 + 20) * 4 + 3) == 32'h0400_0000 + (11 * 1024 + 21),
            "Im2col patch (10,20), tap (1,1)");
      check(ref_elem_addr(w[3], ((32'd2 * 3 + 1) * 512 + 100) * 512 + 200)
            == 32'h0600_0000 + ((2 * 512 + 100) * 512 + 200) * 3 + 1,
            "Permutation (n,c,h,w) = (2,1,100,200)");
      check(ref_elem_addr(w[4], 32'd10 * 65536 + (3 + 8 * 5 + 512 * 77))
            == 32'h0800_0000 + 4 * (((3 * 64 + 5) * 64 + 10) * 128 + 77),
            "Unfold mode-3 row 10, (i1,i2,i4) = (3,5,77)");
      check(ref_elem_addr(w[5], (32'd70 * 256 + 130) * 3 + 2)
            == 32'h0C00_0000 + (((1 * 4 + 2) * 64 + 6) * 64 + 2) * 3 + 2,
            "Batch2Space pixel (70,130) channel 2 from image 6");
      check(ref_elem_addr(w[6], ((32'd3 * 16 + 5) * 32 + 7) * 8 + 2)
            == 32'h1000_0000 + 4 * (((6 * 64 + 20) * 64 + 14) * 512 + 128),
            "Slicing (3,5,7,2) -> (6,20,14,128)");
      wl_lines = lines_done;
      for (int i = 0; i < 7; i++)
        for (int n = 0; n < 12; n++)
          snq.push_back(w[i].reorg_base + (($urandom % (w[i].reorg_size / 64)) * 64)
                        + 32'(16 * ($urandom % 4)));
      drain();
      check(lines_done - wl_lines == 84, "all workload lines returned");
    end

    // ---------------- mechanisms
    $display("hits=%0d misses=%0d rob_full=%0d fetch_full=%0d ooo=%0d wrap=%0d carry=%0d cd_bp=%0d inval=%0d reads=%0d",
             hits, misses, rob_full, fetch_full, ooo_count, wrapped, dim_carry, cd_bp,
             invalidations, mem_reads);
    $display("width 1:%0d 2:%0d 4:%0d 8:%0d", width_seen[1], width_seen[2], width_seen[4], width_seen[8]);
    check(hits > 0,          "snoop hit seen");
    check(misses > 0,        "snoop miss seen");
    check(rob_full > 0,      "ROB full stall seen");
    check(fetch_full > 0,    "fetch table full seen");
    check(ooo_count > 0,     "out-of-order memory response seen");
    check(wrapped > 0,       "non-zero WRAP seen");
    check(dim_carry > 0,     "RDG dimension carry seen");
    check(cd_bp > 0,         "CD back-pressure seen");
    check(invalidations > 0, "entry invalidation seen");
    check(width_seen[1] > 0 && width_seen[2] > 0 && width_seen[4] > 0 && width_seen[8] > 0,
          "all element sizes seen");
    check(exp_cr.size() == 0 && exp_line.size() == 0, "no response outstanding");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
