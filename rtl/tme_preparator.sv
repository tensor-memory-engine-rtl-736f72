// tme_preparator -- splits a reorganized line offset into per-dimension
// coordinates.
//
// For a line at reorg_addr of object a with element size s', the linear
// element offset is o = (reorg_addr - a) / s'. The coordinate of dimension i
// is
//     c_i = omega_i + (o / (w_0 * ... * w_{i-1})) % w_i .
// The successive divisions are spread over a pipeline with one stage per
// dimension: stage i receives the quotient q_i = o / (w_0 * ... * w_{i-1}),
// produces c_i = omega_i + q_i % w_i and passes q_{i+1} = q_i / w_i on. Each
// stage reads its own operands (omega_i, w_i) from the configuration port
// with the config_ID that travels down the pipeline. The last stage reads
// the rest of the specification and emits the RDG input: strides (lengths),
// starts, wrap limits (omega_i + w_i), coordinates, request_ID, element
// width and the raw tensor base (target_addr). A length of 0 is taken as 1.
//
// Interface: valid/ready command in (monitor command), valid/ready RDG input
// out, read access to the configuration arrays.
// Timing: fully pipelined, one command per cycle; N_MAX + 1 cycles from the
// input handshake to out_valid. The whole pipeline holds while out_valid is
// high and out_ready low.
//
// From the design description: Eq. for c_i, a pipeline over the N_MAX
// division/modulo steps, and per-step operand lookup by configuration ID.
// This implementation's choices: one stage per dimension with a
// combinational divider, an extra input stage that forms o, and the
// meaning of the RDG input fields (see tme_pkg).
//
// Lint note: rst_n also drives the disable-iff of the handshake assertions,
// so lint reports it as used both asynchronously and synchronously; the
// logic itself uses it only as an asynchronous reset.
// The output stage reads every field of the descriptor entry except the
// reorganized range (reorg_base, reorg_size), which lint reports as unused
// bits of the entry copy.
module tme_preparator
  import tme_pkg::*;
#(
  parameter int unsigned D = 8
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       cmd_valid,
  output logic       cmd_ready,
  input  mon_cmd_t   cmd,
  output logic       out_valid,
  input  logic       out_ready,
  output rdg_in_t    out,
  input  cfg_desc_t  tbl [D],
  input  logic [D-1:0] valid
);

  localparam int unsigned EW = (D > 1) ? $clog2(D) : 1;

  typedef struct packed {
    logic                   v;
    logic [EW-1:0]          cfg;
    id_t                    rid;
    logic [31:0]            q;
    logic [N_MAX-1:0][31:0] c;
  } stage_t;

  stage_t      st   [N_MAX + 1];
  logic        adv;
  logic [31:0] wlen [N_MAX];   // w_k of the entry in stage k (0 read as 1)

  always_comb
    for (int k = 0; k < N_MAX; k++) begin
      wlen[k] = tbl[st[k].cfg].dims[k].length;
      if (wlen[k] == 32'd0) wlen[k] = 32'd1;
    end

  assign adv       = !st[N_MAX].v || out_ready;
  assign cmd_ready = adv;

  // Input stage: element offset of the line inside the object.
  logic [EW-1:0] in_cfg;
  logic [31:0]   in_off;
  assign in_cfg = cmd.config_id[EW-1:0];
  assign in_off = cmd.reorg_addr - tbl[in_cfg].reorg_base;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k <= N_MAX; k++) st[k] <= '0;
    end else if (adv) begin
      st[0].v   <= cmd_valid;
      st[0].cfg <= in_cfg;
      st[0].rid <= cmd.request_id;
      st[0].q   <= in_off >> width_log2(tbl[in_cfg].width);
      st[0].c   <= '0;
      for (int k = 0; k < N_MAX; k++) begin
        st[k+1]      <= st[k];
        st[k+1].q    <= st[k].q / wlen[k];
        st[k+1].c[k] <= tbl[st[k].cfg].dims[k].start + (st[k].q % wlen[k]);
      end
    end
  end

  // Output: the remaining operands of the specification.
  always_comb begin
    cfg_desc_t e;
    e = tbl[st[N_MAX].cfg];
    for (int k = 0; k < N_MAX; k++) begin
      out.lengths[k] = e.dims[k].stride;
      out.starts[k]  = e.dims[k].start;
      out.limits[k]  = e.dims[k].start + ((e.dims[k].length == 32'd0) ? 32'd1 : e.dims[k].length);
    end
    out.coords      = st[N_MAX].c;
    out.request_id  = st[N_MAX].rid;
    out.width       = e.width;
    out.target_addr = e.target_base;
  end
  assign out_valid = st[N_MAX].v;

  // Entries are cleared only after their reorganized accesses are done.
  a_cfg_valid: assert property (@(posedge clk) disable iff (!rst_n)
                                cmd_valid |-> valid[in_cfg]);

endmodule
