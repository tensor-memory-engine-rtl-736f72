// tme_top -- Tensor Memory Engine.
//
// The engine sits on the coherent port of a processor's interconnect and
// answers cache-line snoops that fall into registered "reorganized" address
// ranges with lines it composes on the fly from a tensor stored elsewhere in
// memory, gathered element by element with non-cached reads on the read
// channels of the same ACE port. A
// line's path through the engine:
//
//   ACE AC -> trapper -> monitor (ROB entry) -> preparator (c_i per dimension)
//          -> RDG (one descriptor per element) -> fetch unit (AXI AR)
//   AXI R  -> fetch unit (isolate + align) -> monitor (merge, count)
//          -> trapper (in snoop order) -> ACE CD
//
// Software programs the access-pattern specifications through the AXI4-Lite
// configuration port before it touches a reorganized range (register map in
// tme_config_port). Snoops outside every valid range get an immediate snoop
// miss.
//
// Ports: AXI4-Lite subordinate (configuration), ACE snoop channels AC/CR/CD
// (CD is BUS_W = 128 bits, 4 beats per 64-byte line), and the read-address
// and read-data channels of that ACE port, used only for ReadNoSnoop element
// reads (128-bit data, IDs of 8 bits; the write channels are not used and
// not brought out). All signals are synchronous to clk; rst_n is an asynchronous,
// active-low reset.
//
// Parameters: D specifications, M_MAX outstanding lines in the ROB, L_MAX
// outstanding element reads. N_MAX (dimensions) and the line and bus sizes
// are in tme_pkg. The design description names these parameters but gives
// none of their values; the defaults here are this implementation's choice.
// The performance-monitoring unit of the original design is not included.
//
// Lint note: rst_n also drives the disable-iff of the handshake assertions,
// so lint reports it as used both asynchronously and synchronously; the
// logic itself uses it only as an asynchronous reset.
module tme_top
  import tme_pkg::*;
#(
  parameter int unsigned D      = 8,
  parameter int unsigned M_MAX  = 8,
  parameter int unsigned L_MAX  = 16,
  parameter int unsigned CFG_AW = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration port (AXI4-Lite)
  input  logic              cfg_awvalid,
  output logic              cfg_awready,
  input  logic [CFG_AW-1:0] cfg_awaddr,
  input  logic              cfg_wvalid,
  output logic              cfg_wready,
  input  logic [31:0]       cfg_wdata,
  input  logic [3:0]        cfg_wstrb,
  output logic              cfg_bvalid,
  input  logic              cfg_bready,
  output logic [1:0]        cfg_bresp,
  input  logic              cfg_arvalid,
  output logic              cfg_arready,
  input  logic [CFG_AW-1:0] cfg_araddr,
  output logic              cfg_rvalid,
  input  logic              cfg_rready,
  output logic [31:0]       cfg_rdata,
  output logic [1:0]        cfg_rresp,
  // ACE snoop channels
  input  logic              ac_valid,
  output logic              ac_ready,
  input  logic [31:0]       ac_addr,
  input  logic [3:0]        ac_snoop,
  input  logic [2:0]        ac_prot,
  output logic              cr_valid,
  input  logic              cr_ready,
  output logic [4:0]        cr_resp,
  output logic              cd_valid,
  input  logic              cd_ready,
  output logic [BUS_W-1:0]  cd_data,
  output logic              cd_last,
  // ACE read channels (AR / R): non-cached element reads
  output logic              m_arvalid,
  input  logic              m_arready,
  output logic [31:0]       m_araddr,
  output logic [7:0]        m_arid,
  output logic [7:0]        m_arlen,
  output logic [2:0]        m_arsize,
  output logic [1:0]        m_arburst,
  output logic [3:0]        m_arcache,
  output logic [3:0]        m_arsnoop,
  output logic [1:0]        m_ardomain,
  output logic [1:0]        m_arbar,
  input  logic              m_rvalid,
  output logic              m_rready,
  input  logic [BUS_W-1:0]  m_rdata,
  input  logic [7:0]        m_rid,
  input  logic [1:0]        m_rresp,
  input  logic              m_rlast
);

  cfg_desc_t    tbl [D];
  logic [D-1:0] valid;

  logic                     req_valid, req_ready;
  req_cmd_t                 req_cmd;
  logic [$clog2(BEATS)-1:0] req_wrap;
  logic [7:0]               req_nfrag;
  logic                     line_valid, line_ready;
  line_rsp_t                line;
  logic                     cmd_valid, cmd_ready;
  mon_cmd_t                 cmd;
  logic                     prep_valid, prep_ready;
  rdg_in_t                  prep;
  logic                     desc_valid, desc_ready;
  rdg_desc_t                desc;
  logic                     frag_valid;
  partial_rsp_t             frag;

  tme_config_port #(.D(D), .ADDR_W(CFG_AW)) u_cfg (
    .clk, .rst_n,
    .s_awvalid(cfg_awvalid), .s_awready(cfg_awready), .s_awaddr(cfg_awaddr),
    .s_wvalid(cfg_wvalid),   .s_wready(cfg_wready),   .s_wdata(cfg_wdata),
    .s_wstrb(cfg_wstrb),
    .s_bvalid(cfg_bvalid),   .s_bready(cfg_bready),   .s_bresp(cfg_bresp),
    .s_arvalid(cfg_arvalid), .s_arready(cfg_arready), .s_araddr(cfg_araddr),
    .s_rvalid(cfg_rvalid),   .s_rready(cfg_rready),   .s_rdata(cfg_rdata),
    .s_rresp(cfg_rresp),
    .tbl, .valid
  );

  tme_trapper #(.D(D)) u_trapper (
    .clk, .rst_n,
    .ac_valid, .ac_ready, .ac_addr, .ac_snoop, .ac_prot,
    .cr_valid, .cr_ready, .cr_resp,
    .cd_valid, .cd_ready, .cd_data, .cd_last,
    .tbl, .valid,
    .req_valid, .req_ready, .req_cmd, .req_wrap, .req_nfrag,
    .line_valid, .line_ready, .line
  );

  tme_monitor #(.M_MAX(M_MAX)) u_monitor (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_cmd, .req_wrap, .req_nfrag,
    .cmd_valid, .cmd_ready, .cmd,
    .frag_valid, .frag,
    .line_valid, .line_ready, .line
  );

  tme_preparator #(.D(D)) u_prep (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd,
    .out_valid(prep_valid), .out_ready(prep_ready), .out(prep),
    .tbl, .valid
  );

  tme_rdg u_rdg (
    .clk, .rst_n,
    .in_valid(prep_valid), .in_ready(prep_ready), .in(prep),
    .out_valid(desc_valid), .out_ready(desc_ready), .out(desc)
  );

  tme_fetch_unit #(.L_MAX(L_MAX)) u_fetch (
    .clk, .rst_n,
    .in_valid(desc_valid), .in_ready(desc_ready), .in(desc),
    .m_arvalid, .m_arready, .m_araddr, .m_arid, .m_arlen, .m_arsize,
    .m_arburst, .m_arcache, .m_arsnoop, .m_ardomain, .m_arbar,
    .m_rvalid, .m_rready, .m_rdata, .m_rid, .m_rresp, .m_rlast,
    .frag_valid, .frag
  );

endmodule
