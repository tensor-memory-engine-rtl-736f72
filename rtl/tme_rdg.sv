// tme_rdg -- Request Descriptors Generator.
//
// Takes the first coordinates (c_0 .. c_{N_MAX-1}) of a reorganized line from
// the preparator and produces the s/s' read descriptors that fetch the line,
// one per clock cycle. Descriptor k reads the element at
//     read_addr    = b + s' * sum_i c_i * sigma_i
// and places it at write_offset = k * s' in the new line. After each
// descriptor the coordinates advance like an odometer: c_0 increments, and
// a coordinate that reaches its limit (omega_i + w_i) goes back to omega_i
// and carries into the next dimension. The descriptors of a line carry its
// request_ID and the element width. The address sum is recomputed from the
// coordinates every cycle.
//
// Interface: valid/ready RDG input in, valid/ready descriptor stream out.
// Timing: the first descriptor is valid on the cycle after the input
// handshake; with out_ready held high, one descriptor leaves per cycle and
// the next line's input is taken in the cycle of the last descriptor, so
// consecutive lines follow each other without a gap.
//
// From the design description: the base + o_0 start address, one new
// descriptor per cycle, and the coordinate stepping within the dimension
// lengths. This implementation's choices: addresses in bytes (element offset
// scaled by s'), the odometer carry chain, and the back-to-back hand-over.
//
// Lint note: rst_n also drives the disable-iff of the handshake assertions,
// so lint reports it as used both asynchronously and synchronously; the
// logic itself uses it only as an asynchronous reset.
module tme_rdg
  import tme_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  rdg_in_t    in,
  output logic       out_valid,
  input  logic       out_ready,
  output rdg_desc_t  out
);

  rdg_in_t     cur;
  logic        busy;
  logic [7:0]  k;      // index of the current descriptor in the line
  logic [7:0]  nfrag;  // descriptors per line
  logic        last;
  logic [31:0] elem;

  assign last      = (k == nfrag - 1'b1);
  assign out_valid = busy;
  assign in_ready  = !busy || (out_ready && last);

  always_comb begin
    elem = '0;
    for (int i = 0; i < N_MAX; i++) elem += cur.coords[i] * cur.lengths[i];
  end

  assign out.read_addr    = cur.target_addr + (elem << width_log2(cur.width));
  assign out.write_offset = 32'(k) << width_log2(cur.width);
  assign out.request_id   = cur.request_id;
  assign out.width        = cur.width;

  // Next coordinates: odometer step with wrap-around at each limit.
  logic [N_MAX-1:0][31:0] nxt;
  always_comb begin
    logic carry;
    carry = 1'b1;
    nxt   = cur.coords;
    for (int i = 0; i < N_MAX; i++) begin
      if (carry) begin
        if (cur.coords[i] + 1 >= cur.limits[i]) begin
          nxt[i] = cur.starts[i];
        end else begin
          nxt[i] = cur.coords[i] + 1;
          carry  = 1'b0;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      cur   <= '0;
      k     <= '0;
      nfrag <= '0;
    end else if (in_valid && in_ready) begin
      busy  <= 1'b1;
      cur   <= in;
      k     <= '0;
      nfrag <= 8'(LINE_BYTES >> width_log2(in.width));
    end else if (busy && out_ready) begin
      cur.coords <= nxt;
      k          <= k + 1'b1;
      if (last) busy <= 1'b0;
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               out_valid && !out_ready |=> out_valid && $stable(out));

endmodule
