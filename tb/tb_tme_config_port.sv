// tb_tme_config_port -- testbench of the configuration port.
//
// Writes every register of several entries through AXI4-Lite (some with
// partial byte strobes), then checks the descriptor and validity arrays seen
// by the data path and the values read back, against a model kept by the
// testbench. Also checks the reset contents and that unmapped offsets read
// as zero. BVALID must follow the write handshake by one cycle and RVALID
// the read handshake by one cycle.
module tb_tme_config_port;
  import tme_pkg::*;

  localparam int D = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 0;
  logic        arvalid = 0, arready, rvalid, rready = 0;
  logic [15:0] awaddr = 0, araddr = 0;
  logic [31:0] wdata = 0, rdata;
  logic [3:0]  wstrb = 0;
  logic [1:0]  bresp, rresp;
  cfg_desc_t   tbl [D];
  logic [D-1:0] valid;

  tme_config_port #(.D(D)) dut (
    .clk, .rst_n,
    .s_awvalid(awvalid), .s_awready(awready), .s_awaddr(awaddr),
    .s_wvalid(wvalid), .s_wready(wready), .s_wdata(wdata), .s_wstrb(wstrb),
    .s_bvalid(bvalid), .s_bready(bready), .s_bresp(bresp),
    .s_arvalid(arvalid), .s_arready(arready), .s_araddr(araddr),
    .s_rvalid(rvalid), .s_rready(rready), .s_rdata(rdata), .s_rresp(rresp),
    .tbl, .valid
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input logic [15:0] a, input logic [31:0] d, input logic [3:0] s);
    awaddr <= a; wdata <= d; wstrb <= s; awvalid <= 1; wvalid <= 1;
    do @(posedge clk); while (!awready);
    awvalid <= 0; wvalid <= 0;
    @(posedge clk);
    check(bvalid && bresp == 2'b00, "BVALID one cycle after write");
    bready <= 1;
    @(posedge clk);
    bready <= 0;
  endtask

  task automatic rd(input logic [15:0] a, output logic [31:0] d);
    araddr <= a; arvalid <= 1;
    do @(posedge clk); while (!arready);
    arvalid <= 0;
    @(posedge clk);
    check(rvalid, "RVALID one cycle after read");
    d = rdata;
    rready <= 1;
    @(posedge clk);
    rready <= 0;
  endtask

  // model: reg[e][off/4]
  logic [31:0] mreg [D][64];

  function automatic logic [31:0] field(input cfg_desc_t e, input logic v, input int off);
    if (off == 0)  return {31'd0, v};
    if (off == 4)  return e.reorg_base;
    if (off == 8)  return e.reorg_size;
    if (off == 12) return e.target_base;
    if (off == 16) return {24'd0, e.width};
    for (int i = 0; i < N_MAX; i++) begin
      if (off == 32 + 16 * i) return e.dims[i].start;
      if (off == 36 + 16 * i) return e.dims[i].stride;
      if (off == 40 + 16 * i) return e.dims[i].length;
    end
    return 0;
  endfunction

  function automatic bit mapped(input int off);
    if (off <= 16) return off != 20;
    if (off < 32) return 0;
    return ((off - 32) % 16) < 12 && (off - 32) / 16 < N_MAX;
  endfunction

  logic [31:0] v, d;
  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // reset contents
    for (int e = 0; e < D; e++) begin
      check(!valid[e], "invalid after reset");
      for (int i = 0; i < N_MAX; i++)
        check(tbl[e].dims[i].length == 1 && tbl[e].dims[i].stride == 0,
              "identity dimension after reset");
    end
    for (int e = 0; e < D; e++)
      for (int o = 0; o < 64; o++) mreg[e][o] = 32'd0;
    for (int e = 0; e < D; e++)
      for (int i = 0; i < N_MAX; i++) mreg[e][(40 + 16 * i) / 4] = 1;
    // fill all mapped registers
    for (int e = 0; e < D; e++)
      for (int off = 4; off < 32 + 16 * N_MAX; off += 4)
        if (mapped(off)) begin
          logic [3:0] s;
          v = $urandom;
          s = ($urandom % 3 == 0) ? 4'(1 + $urandom % 15) : 4'hF;
          if (off == 16) begin v = 32'(1 << ($urandom % 4)); s = 4'hF; end
          wr(16'(e * 256 + off), v, s);
          for (int b = 0; b < 4; b++)
            if (s[b]) mreg[e][off / 4][8 * b +: 8] = v[8 * b +: 8];
          if (off == 16) mreg[e][4] = {24'd0, mreg[e][4][7:0]};
        end
    wr(16'(1 * 256), 32'd1, 4'hF); mreg[1][0] = 1;
    wr(16'(3 * 256), 32'd1, 4'hF); mreg[3][0] = 1;
    wr(16'(2 * 256 + 20), 32'hFFFF_FFFF, 4'hF);   // unmapped: ignored
    check(valid == 4'b1010, "validity array");
    for (int e = 0; e < D; e++)
      for (int off = 0; off < 256; off += 4) begin
        logic [31:0] exp;
        exp = mapped(off) ? mreg[e][off / 4] : 32'd0;
        check(field(tbl[e], valid[e], off) == exp, $sformatf("array e%0d off %0d", e, off));
        if (off % 16 == 0 || off < 32) begin
          rd(16'(e * 256 + off), d);
          check(d == exp, $sformatf("readback e%0d off %0d: %h vs %h", e, off, d, exp));
        end
      end
    // clear an entry
    wr(16'(3 * 256), 32'd0, 4'hF);
    check(valid == 4'b0010, "entry cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
