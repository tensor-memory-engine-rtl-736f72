// tb_tme_preparator -- testbench of the preparator.
//
// Four random specifications (1 to N_MAX dimensions, lengths up to 40,
// random starts, strides and element sizes) sit in the configuration
// arrays. Commands for random lines of these objects are sent, first
// back-to-back with the output always ready, then with random gaps and
// random output back-pressure. Each output must carry the command's
// request_ID and, for every dimension, c_i = omega_i + (o / prod w_j) % w_i
// (computed here with plain division), limit omega_i + w_i, start, stride,
// element size and raw base. In the first phase every result must appear
// exactly N_MAX + 1 cycles after its command, one per cycle.
module tb_tme_preparator;
  import tme_pkg::*;
  import tme_tb_pkg::*;

  localparam int D = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic cmd_valid = 0, cmd_ready, out_valid, out_ready = 1;
  mon_cmd_t cmd = '0;
  rdg_in_t out;
  cfg_desc_t tbl [D];
  logic [D-1:0] valid = '1;

  tme_preparator #(.D(D)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .out_valid, .out_ready, .out, .tbl, .valid
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

  mon_cmd_t sent[$];
  longint   sent_at[$];
  int       received = 0;
  bit       timing_phase = 1;
  bit       took = 0;

  task automatic expect_out(input mon_cmd_t c, input longint t0);
    cfg_desc_t e;
    logic [31:0] o, q, w;
    bit ok;
    e = tbl[c.config_id];
    o = (c.reorg_addr - e.reorg_base) / e.width;
    q = o;
    ok = out.request_id == c.request_id && out.width == e.width
         && out.target_addr == e.target_base;
    for (int i = 0; i < N_MAX; i++) begin
      w = (e.dims[i].length == 0) ? 1 : e.dims[i].length;
      ok &= out.coords[i] == e.dims[i].start + q % w;
      ok &= out.limits[i] == e.dims[i].start + w;
      ok &= out.starts[i] == e.dims[i].start;
      ok &= out.lengths[i] == e.dims[i].stride;
      q = q / w;
    end
    check(ok, $sformatf("result for request %0d", c.request_id));
    if (timing_phase) check(cycle - t0 == N_MAX + 1, $sformatf("latency %0d", cycle - t0));
  endtask

  initial begin
    for (int e = 0; e < D; e++) begin
      int nd;
      tbl[e] = blank_desc();
      tbl[e].reorg_base  = 32'h4000_0000 + 32'(e) * 32'h0100_0000;
      tbl[e].reorg_size  = 32'h0100_0000;
      tbl[e].target_base = $urandom;
      tbl[e].width       = 8'(1 << ($urandom % 4));
      nd = 1 + $urandom % N_MAX;
      for (int i = 0; i < nd; i++) begin
        tbl[e].dims[i].length = 1 + $urandom % 40;
        tbl[e].dims[i].start  = $urandom % 5;
        tbl[e].dims[i].stride = $urandom % 1000;
      end
    end
    tbl[1].dims[2].length = 0;     // a length of 0 acts as 1
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      if (n == 300) timing_phase = 0;
      if (!cmd_valid || took) begin
        cmd_valid = 0;
        if (n < 580 && (timing_phase || $urandom % 2 == 0)) begin
          int e;
          e = $urandom % D;
          cmd_valid = 1;
          cmd.config_id  = 8'(e);
          cmd.request_id = 8'($urandom);
          cmd.reorg_addr = tbl[e].reorg_base + (($urandom % 32'h0100_0000) & ~32'h3F);
        end
      end
      out_ready = timing_phase || ($urandom % 3 != 0);
      #1;
      if (out_valid && out_ready) begin
        expect_out(sent.pop_front(), sent_at.pop_front());
        received++;
      end
      took = cmd_valid && cmd_ready;
      if (took) begin
        sent.push_back(cmd);
        sent_at.push_back(cycle);
      end
    end
    for (int n = 0; n < 300 && sent.size() > 0; n++) begin
      @(negedge clk);
      cmd_valid = 0;
      out_ready = 1;
      #1;
      if (out_valid && out_ready) begin
        expect_out(sent.pop_front(), sent_at.pop_front());
        received++;
      end
    end
    check(sent.size() == 0, "every command produced a result");
    check(received > 400, "enough results");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
