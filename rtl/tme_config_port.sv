// tme_config_port -- configuration port of the Tensor Memory Engine.
//
// Holds the two arrays every other stage reads: a validity array (one bit per
// specification, "in use") and a descriptor array of D access-pattern
// specifications, each with N_MAX dimension triples. Software fills an entry
// and sets its valid bit before any reorganized line is requested, and clears
// the bit when it is done; both arrays can be read back.
//
// Interface: an AXI4-Lite subordinate (32-bit data). Register map, per
// entry e at byte address e*0x100 (all registers 32 bits, read/write):
//   0x00 CTRL         bit 0 = valid
//   0x04 REORG_BASE   a, base of the reorganized object
//   0x08 REORG_SIZE   bytes covered by the reorganized object
//   0x0C TARGET_BASE  b, base of the raw tensor
//   0x10 WIDTH        element size s' in bytes (1, 2, 4 or 8)
//   0x20 + 0x10*i     START  omega_i     (i = 0 .. N_MAX-1)
//   0x24 + 0x10*i     STRIDE sigma_i
//   0x28 + 0x10*i     LENGTH w_i
// Unmapped offsets read 0 and ignore writes; both answer OKAY.
//
// Timing: a write is taken when AW and W are both valid and no B response is
// pending; the array updates on that edge and BVALID rises the next cycle.
// A read returns RVALID one cycle after the AR handshake. The arrays are
// plain registers, so tbl/valid show a write on the cycle after it.
//
// What comes from the design description: the two arrays, their depth D,
// N_MAX entries per pattern, and AXI access from the processor. The register
// map, AXI4-Lite, and the reset contents (all invalid, identity dimensions
// of length 1) are this implementation's choices.
//
// Lint note: rst_n also drives the disable-iff of the handshake assertions,
// so lint reports it as used both asynchronously and synchronously; the
// logic itself uses it only as an asynchronous reset.
// Address bits above the entry index and below bit 2 are ignored (the
// register file aliases over the rest of the window), which lint reports
// as unused bits of s_awaddr and s_araddr.
module tme_config_port
  import tme_pkg::*;
#(
  parameter int unsigned D      = 8,   // number of simultaneous specifications
  parameter int unsigned ADDR_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite write address / data / response
  input  logic              s_awvalid,
  output logic              s_awready,
  input  logic [ADDR_W-1:0] s_awaddr,
  input  logic              s_wvalid,
  output logic              s_wready,
  input  logic [31:0]       s_wdata,
  input  logic [3:0]        s_wstrb,
  output logic              s_bvalid,
  input  logic              s_bready,
  output logic [1:0]        s_bresp,
  // AXI4-Lite read address / data
  input  logic              s_arvalid,
  output logic              s_arready,
  input  logic [ADDR_W-1:0] s_araddr,
  output logic              s_rvalid,
  input  logic              s_rready,
  output logic [31:0]       s_rdata,
  output logic [1:0]        s_rresp,
  // Arrays, visible to the trapper and the preparator
  output cfg_desc_t         tbl   [D],
  output logic [D-1:0]      valid
);

  localparam int unsigned EW = (D > 1) ? $clog2(D) : 1;

  initial assert (8 + EW <= ADDR_W) else $error("ADDR_W too small for D");

  // Register index inside an entry: offset[7:2].
  function automatic logic [31:0] reg_read(input cfg_desc_t e, input logic v,
                                           input logic [7:0] off);
    logic [31:0] r;
    r = '0;
    case (off)
      8'h00: r = {31'd0, v};
      8'h04: r = e.reorg_base;
      8'h08: r = e.reorg_size;
      8'h0C: r = e.target_base;
      8'h10: r = {24'd0, e.width};
      default: begin
        for (int i = 0; i < N_MAX; i++) begin
          if (off == 8'(32 + 16 * i))     r = e.dims[i].start;
          if (off == 8'(32 + 16 * i + 4)) r = e.dims[i].stride;
          if (off == 8'(32 + 16 * i + 8)) r = e.dims[i].length;
        end
      end
    endcase
    return r;
  endfunction

  function automatic logic [31:0] merge(input logic [31:0] old, input logic [31:0] nw,
                                        input logic [3:0] strb);
    logic [31:0] r;
    for (int b = 0; b < 4; b++) r[8*b +: 8] = strb[b] ? nw[8*b +: 8] : old[8*b +: 8];
    return r;
  endfunction

  logic              wr_fire;
  logic [EW-1:0]     wr_ent;
  logic [7:0]        wr_off;
  logic [EW-1:0]     rd_ent;

  assign s_awready = s_awvalid && s_wvalid && !s_bvalid;
  assign s_wready  = s_awready;
  assign wr_fire   = s_awready;
  assign wr_ent    = s_awaddr[8 +: EW];
  assign wr_off    = {s_awaddr[7:2], 2'b00};
  assign rd_ent    = s_araddr[8 +: EW];
  assign s_arready = !s_rvalid;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
      for (int e = 0; e < D; e++) begin
        tbl[e] <= '0;
        for (int i = 0; i < N_MAX; i++) tbl[e].dims[i].length <= 32'd1;
      end
    end else if (wr_fire && 32'(wr_ent) < D) begin
      case (wr_off)
        8'h00: if (s_wstrb[0]) valid[wr_ent] <= s_wdata[0];
        8'h04: tbl[wr_ent].reorg_base  <= merge(tbl[wr_ent].reorg_base,  s_wdata, s_wstrb);
        8'h08: tbl[wr_ent].reorg_size  <= merge(tbl[wr_ent].reorg_size,  s_wdata, s_wstrb);
        8'h0C: tbl[wr_ent].target_base <= merge(tbl[wr_ent].target_base, s_wdata, s_wstrb);
        8'h10: if (s_wstrb[0]) tbl[wr_ent].width <= s_wdata[7:0];
        default: begin
          for (int i = 0; i < N_MAX; i++) begin
            if (wr_off == 8'(32 + 16 * i))
              tbl[wr_ent].dims[i].start  <= merge(tbl[wr_ent].dims[i].start,  s_wdata, s_wstrb);
            if (wr_off == 8'(32 + 16 * i + 4))
              tbl[wr_ent].dims[i].stride <= merge(tbl[wr_ent].dims[i].stride, s_wdata, s_wstrb);
            if (wr_off == 8'(32 + 16 * i + 8))
              tbl[wr_ent].dims[i].length <= merge(tbl[wr_ent].dims[i].length, s_wdata, s_wstrb);
          end
        end
      endcase
    end
  end

  // Write response channel.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  s_bvalid <= 1'b0;
    else if (wr_fire)            s_bvalid <= 1'b1;
    else if (s_bready)           s_bvalid <= 1'b0;
  end

  // Read data channel.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
    end else if (s_arvalid && s_arready) begin
      s_rvalid <= 1'b1;
      s_rdata  <= (32'(rd_ent) < D)
                  ? reg_read(tbl[rd_ent], valid[rd_ent], {s_araddr[7:2], 2'b00}) : '0;
    end else if (s_rready) begin
      s_rvalid <= 1'b0;
    end
  end

  // AXI rule: a response stays valid until it is accepted.
  property p_hold(v, r);
    @(posedge clk) disable iff (!rst_n) v && !r |=> v;
  endproperty
  a_b_hold: assert property (p_hold(s_bvalid, s_bready));
  a_r_hold: assert property (p_hold(s_rvalid, s_rready));

endmodule
