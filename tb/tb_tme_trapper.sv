// tb_tme_trapper -- testbench of the trapper.
//
// Drives the configuration arrays directly with a few ranges (overlapping
// ones included, to check that the lowest entry wins), issues random snoops
// and checks, for each: the CR response one cycle after the AC handshake
// (DataTransfer for a hit, 0 for a snoop miss), and for a hit the request
// handed to the monitor (line address, config_ID, WRAP, fragment count).
// The monitor side refuses requests at random; a refused hit must keep
// AC waiting. Lines are then fed in and the CD beats are checked for
// wrap order and CDLAST under random CDREADY.
module tb_tme_trapper;
  import tme_pkg::*;

  localparam int D = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ac_valid = 0, ac_ready, cr_valid, cr_ready = 1, cd_valid, cd_ready = 1, cd_last;
  logic [31:0] ac_addr = 0;
  logic [4:0]  cr_resp;
  logic [BUS_W-1:0] cd_data;
  cfg_desc_t   tbl [D];
  logic [D-1:0] valid;
  logic req_valid, req_ready = 0, line_valid = 0, line_ready;
  req_cmd_t req_cmd;
  logic [1:0] req_wrap;
  logic [7:0] req_nfrag;
  line_rsp_t line;

  tme_trapper #(.D(D)) dut (
    .clk, .rst_n, .ac_valid, .ac_ready, .ac_addr, .ac_snoop(4'd1), .ac_prot(3'd0),
    .cr_valid, .cr_ready, .cr_resp, .cd_valid, .cd_ready, .cd_data, .cd_last,
    .tbl, .valid, .req_valid, .req_ready, .req_cmd, .req_wrap, .req_nfrag,
    .line_valid, .line_ready, .line
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int lookup(input logic [31:0] a);
    for (int e = 0; e < D; e++)
      if (valid[e] && a >= tbl[e].reorg_base && a < tbl[e].reorg_base + tbl[e].reorg_size)
        return e;
    return -1;
  endfunction

  int hits = 0, misses = 0, refused = 0;
  initial begin
    for (int e = 0; e < D; e++) tbl[e] = '0;
    tbl[0].reorg_base = 32'h1000_0000; tbl[0].reorg_size = 32'h0000_1000; tbl[0].width = 1;
    tbl[1].reorg_base = 32'h1000_0800; tbl[1].reorg_size = 32'h0000_1000; tbl[1].width = 2;
    tbl[2].reorg_base = 32'h2000_0000; tbl[2].reorg_size = 32'h0000_0100; tbl[2].width = 8;
    tbl[3].reorg_base = 32'h3000_0000; tbl[3].reorg_size = 32'h0000_1000; tbl[3].width = 4;
    valid = 4'b0111;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < 400; n++) begin
      int e, s;
      s = $urandom % 5;
      case (s)
        0, 1:    ac_addr <= 32'h1000_0000 + $urandom % 32'h2000;  // entries 0, 1, overlap, past both
        2:       ac_addr <= 32'h2000_0000 + $urandom % 32'h100;   // entry 2
        3:       ac_addr <= 32'h3000_0000 + $urandom % 32'h1000;  // entry 3, not valid
        default: ac_addr <= 32'h2000_0100 + $urandom % 64;        // just past entry 2
      endcase
      ac_valid  <= 1;
      req_ready <= ($urandom % 3 != 0);
      @(negedge clk);
      while (!ac_ready) begin
        check(!(lookup(ac_addr) < 0), "a miss is never held back");
        check(req_valid && !req_ready, "AC held only while the monitor refuses");
        refused++;
        req_ready = ($urandom % 2 == 0);
        #1;
        if (!ac_ready) @(negedge clk);
      end
      // the handshake happens on the coming edge
      e = lookup(ac_addr);
      if (e >= 0) begin
        hits++;
        check(req_valid && req_cmd.reorg_addr == {ac_addr[31:6], 6'd0}
              && req_cmd.config_id == 8'(e) && req_wrap == ac_addr[5:4]
              && req_nfrag == 8'(64 / tbl[e].width), $sformatf("request for %h", ac_addr));
      end else begin
        misses++;
        check(!req_valid, "no request on a miss");
      end
      @(posedge clk);
      ac_valid <= 0;
      @(negedge clk);
      check(cr_valid && cr_resp == ((e >= 0) ? 5'b00001 : 5'b00000), "CR one cycle after AC");
    end
    // snoop data path
    cr_ready <= 1;
    for (int n = 0; n < 40; n++) begin
      line_rsp_t l;
      int k;
      for (int w = 0; w < LINE_W / 32; w++) l.data[32 * w +: 32] = $urandom;
      l.wrap = 2'($urandom);
      line <= l;
      line_valid <= 1;
      do @(posedge clk); while (!line_ready);
      line_valid <= 0;
      k = 0;
      while (k < BEATS) begin
        @(negedge clk);
        cd_ready = ($urandom % 3 != 0);
        #1;
        if (cd_valid && cd_ready) begin
          check(cd_data == l.data[BUS_W * ((l.wrap + k) % BEATS) +: BUS_W], "CD beat order");
          check(cd_last == (k == BEATS - 1), "CDLAST");
          k++;
        end
      end
    end
    $display("hits=%0d misses=%0d refused=%0d", hits, misses, refused);
    check(hits > 0 && misses > 0 && refused > 0, "hits, misses and stalls seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
