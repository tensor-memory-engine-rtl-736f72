// tb_tme_rdg -- testbench of the Request Descriptors Generator.
//
// Random inputs (1 to N_MAX dimensions, random starts, lengths, strides,
// element sizes and first coordinates) are offered back-to-back. For each
// line the testbench expects 64 / s' descriptors. Descriptor k must read
// b + s' * sum_i c_i(k) * sigma_i and write at k * s', where c(k) is found
// by turning the first coordinates into a mixed-radix number, adding k, and
// splitting it again (no counter stepping, so the check is independent of
// the hardware's carry chain). In the first phase the output is always
// ready and the input always valid: a descriptor must leave on every cycle
// with no gap between lines, the first one on the cycle after the input
// handshake. The second phase adds random back-pressure and input gaps.
module tb_tme_rdg;
  import tme_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  rdg_in_t in = '0;
  rdg_desc_t out;

  tme_rdg dut (.clk, .rst_n, .in_valid, .in_ready, .in, .out_valid, .out_ready, .out);

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

  function automatic rdg_in_t rand_in();
    rdg_in_t r;
    int nd;
    r = '0;
    r.width = 8'(1 << ($urandom % 4));
    r.target_addr = $urandom;
    r.request_id = 8'($urandom);
    nd = 1 + $urandom % N_MAX;
    for (int i = 0; i < N_MAX; i++) begin
      logic [31:0] w;
      w = (i < nd) ? 1 + $urandom % 7 : 1;
      r.starts[i]  = (i < nd) ? $urandom % 4 : 0;
      r.limits[i]  = r.starts[i] + w;
      r.lengths[i] = (i < nd) ? $urandom % 5000 : 0;
      r.coords[i]  = r.starts[i] + $urandom % w;
    end
    return r;
  endfunction

  function automatic rdg_desc_t expected(input rdg_in_t r, input int k);
    rdg_desc_t d;
    longint lin, tot, rad;
    logic [31:0] elem;
    lin = 0; rad = 1;
    for (int i = 0; i < N_MAX; i++) begin
      lin += (r.coords[i] - r.starts[i]) * rad;
      rad *= r.limits[i] - r.starts[i];
    end
    tot  = rad;
    lin  = (lin + k) % tot;
    elem = 0;
    for (int i = 0; i < N_MAX; i++) begin
      longint w;
      w = r.limits[i] - r.starts[i];
      elem += (r.starts[i] + 32'(lin % w)) * r.lengths[i];
      lin  = lin / w;
    end
    d.read_addr    = r.target_addr + elem * r.width;
    d.write_offset = 32'(k) * r.width;
    d.request_id   = r.request_id;
    d.width        = r.width;
    return d;
  endfunction

  rdg_in_t lines[$];
  int      k = 0, lines_done = 0, gaps = 0, descs = 0;
  bit      took = 0, phase1 = 1, first_out = 0;

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 6000; n++) begin
      @(negedge clk);
      if (n == 3000) phase1 = 0;
      if (!in_valid || took) begin
        in_valid = 0;
        if (n < 5500 && (phase1 || $urandom % 3 == 0)) begin
          in_valid = 1;
          in = rand_in();
        end
      end
      out_ready = phase1 || ($urandom % 3 != 0);
      #1;
      if (phase1 && first_out && n < 2900) begin
        check(out_valid, "a descriptor on every cycle");
        if (!out_valid) gaps++;
      end
      if (out_valid && out_ready) begin
        first_out = 1;
        check(out == expected(lines[0], k), $sformatf("line %0d descriptor %0d", lines_done, k));
        descs++;
        k++;
        if (k == LINE_BYTES / lines[0].width) begin
          k = 0;
          void'(lines.pop_front());
          lines_done++;
        end
      end
      took = in_valid && in_ready;
      if (took) lines.push_back(in);
    end
    $display("lines=%0d descriptors=%0d", lines_done, descs);
    check(lines.size() == 0 && lines_done > 100, "all lines generated");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
