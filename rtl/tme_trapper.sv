// tme_trapper -- first and last stage of the TME data path, on the ACE port.
//
// A snoop arriving on the AC channel is compared with every valid entry of
// the configuration port (reorg_base <= addr < reorg_base + reorg_size). On a
// miss the trapper answers at once with CRRESP = 0 ("snoop miss", no data).
// On a hit it answers CRRESP.DataTransfer = 1 and hands the monitor a request
// carrying the line address (reorg_addr), the matching entry (config_ID),
// the critical beat (WRAP) and the number of fragments the line is made of
// (line size / element size). The snoop is accepted only when the monitor
// can take the request, which back-pressures the interconnect when the
// re-order buffer is full. Finished lines come back from the monitor in
// snoop order and leave on the CD channel as BEATS beats, critical beat
// first, wrapping around the line, with CDLAST on the final beat.
//
// Interface: AC/CR/CD channels of an ACE snoop port (AC address 32 bits, CD
// data tme_pkg::BUS_W bits); valid/ready request stream to the monitor;
// valid/ready line stream from the monitor; read access to the configuration
// arrays.
// Timing: AC to CR response is one cycle (registered CR); a request reaches
// the monitor in the same cycle as the AC handshake. A line takes BEATS
// cycles on CD; the next line can start on the cycle after CDLAST.
//
// From the design description: range comparison against the registered
// objects, snoop miss for the rest, extraction of request address, WRAP and
// ID, and the conversion of responses into ACE snoop data. This
// implementation's choices: every snoop type is treated as a read of the
// line, the lowest matching entry wins, a 128-bit CD channel, and CRRESP
// carries only DataTransfer (no shared/dirty state is claimed).
//
// Lint note: rst_n also drives the disable-iff of the handshake assertions,
// so lint reports it as used both asynchronously and synchronously; the
// logic itself uses it only as an asynchronous reset.
module tme_trapper
  import tme_pkg::*;
#(
  parameter int unsigned D = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // ACE snoop address channel
  input  logic                     ac_valid,
  output logic                     ac_ready,
  input  addr_t                    ac_addr,
  input  logic [3:0]               ac_snoop,
  input  logic [2:0]               ac_prot,
  // ACE snoop response channel
  output logic                     cr_valid,
  input  logic                     cr_ready,
  output logic [4:0]               cr_resp,
  // ACE snoop data channel
  output logic                     cd_valid,
  input  logic                     cd_ready,
  output logic [BUS_W-1:0]         cd_data,
  output logic                     cd_last,
  // configuration arrays
  input  cfg_desc_t                tbl   [D],
  input  logic [D-1:0]             valid,
  // request to the monitor
  output logic                     req_valid,
  input  logic                     req_ready,
  output req_cmd_t                 req_cmd,
  output logic [$clog2(BEATS)-1:0] req_wrap,
  output logic [7:0]               req_nfrag,
  // finished line from the monitor
  input  logic                     line_valid,
  output logic                     line_ready,
  input  line_rsp_t                line
);

  localparam int unsigned BW = $clog2(BEATS);
  localparam int unsigned OW = $clog2(LINE_BYTES);
  localparam int unsigned EW = (D > 1) ? $clog2(D) : 1;

  // ---------------------------------------------------------------- lookup
  logic          hit;
  logic [EW-1:0] hit_idx;
  logic [7:0]    hit_id;

  always_comb begin
    hit     = 1'b0;
    hit_idx = '0;
    for (int e = D - 1; e >= 0; e--) begin
      if (valid[e] && (ac_addr >= tbl[e].reorg_base)
          && ((ac_addr - tbl[e].reorg_base) < tbl[e].reorg_size)) begin
        hit     = 1'b1;
        hit_idx = EW'(e);
      end
    end
  end

  assign hit_id = 8'(hit_idx);

  // A snoop is taken when the previous response has left and, for a hit,
  // the monitor has room for it.
  assign ac_ready          = !cr_valid && (!hit || req_ready);
  assign req_valid         = ac_valid && hit && !cr_valid;
  assign req_cmd.reorg_addr = {ac_addr[31:OW], {OW{1'b0}}};
  assign req_cmd.config_id = hit_id;
  assign req_wrap          = ac_addr[OW-1 -: BW];
  assign req_nfrag         = 8'(LINE_BYTES >> width_log2(tbl[hit_idx].width));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cr_valid <= 1'b0;
      cr_resp  <= '0;
    end else if (ac_valid && ac_ready) begin
      cr_valid <= 1'b1;
      cr_resp  <= hit ? 5'(1 << CR_DATA_TRANSFER) : 5'd0;
    end else if (cr_ready) begin
      cr_valid <= 1'b0;
    end
  end

  // ------------------------------------------------------------- snoop data
  logic [LINE_W-1:0] buf_data;
  logic [BW-1:0]     buf_first;
  logic [BW-1:0]     beat_cnt;
  logic              busy;
  logic [BW-1:0]     beat_idx;

  assign line_ready = !busy;
  assign beat_idx   = buf_first + beat_cnt;
  assign cd_valid   = busy;
  assign cd_data    = buf_data[BUS_W * beat_idx +: BUS_W];
  assign cd_last    = busy && (beat_cnt == BW'(BEATS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      buf_data  <= '0;
      buf_first <= '0;
      beat_cnt  <= '0;
    end else if (!busy) begin
      if (line_valid) begin
        busy      <= 1'b1;
        buf_data  <= line.data;
        buf_first <= line.wrap;
        beat_cnt  <= '0;
      end
    end else if (cd_ready) begin
      beat_cnt <= beat_cnt + 1'b1;
      if (cd_last) busy <= 1'b0;
    end
  end

  // The snoop type and protection bits do not change how a trapped line is
  // served; they are sampled only to keep the port complete.
  logic unused_ac;
  assign unused_ac = ^{ac_snoop, ac_prot};

  a_cr_hold: assert property (@(posedge clk) disable iff (!rst_n)
                              cr_valid && !cr_ready |=> cr_valid && $stable(cr_resp));
  a_cd_hold: assert property (@(posedge clk) disable iff (!rst_n)
                              cd_valid && !cd_ready |=> cd_valid && $stable(cd_data));

endmodule
