// pipelined_divider: fully pipelined fixed-point reciprocal, 1/d.
//
// The division-deferring Minv needs Ddef_i = (D_i alpha_{i+1})^-1 for every
// joint of every task. Instead of a multi-cycle iterative divider (or a
// float conversion) this unit is a radix-2 restoring long division unrolled
// into one register stage per quotient bit, so it accepts a new operand every
// cycle and several backward units can share it.
//
// The quotient is floor(2^(2F) / |d|) in fx_t units (value 1/d, truncated),
// computed over QW = 2F+1 quotient bits, then saturated to the fx_t range and
// given the sign of d. d = 0 gives the largest value of the sign.
// Interface: in_valid/d/in_tag in, out_valid/q/out_tag out; the tag travels
// with the operand so the result can be routed back to its requester.
// Timing: latency QW + 2 cycles (input register, QW bit stages, output), throughput one result per cycle.
// The paper specifies a fully pipelined divider; the radix-2 restoring
// structure and the truncation are this implementation's choices.
module pipelined_divider
  import draco_pkg::*;
#(
  parameter int unsigned TAG_W = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  fx_t              d,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output fx_t              q,
  output logic [TAG_W-1:0] out_tag
);
  localparam int unsigned QW  = 2 * F + 1;  // quotient bits
  localparam int unsigned RW  = W + 1;      // remainder width

  typedef struct packed {
    logic             neg;
    logic             zero;
    logic [W-1:0]     dmag;
    logic [RW-1:0]    rem;
    logic [QW-1:0]    quo;
    logic [TAG_W-1:0] tag;
  } stage_t;

  stage_t st [QW+1];
  logic   vld [QW+1];

  // Stage 0: register the operand magnitude.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld[0] <= 1'b0;
    else        vld[0] <= in_valid;
  end
  always_ff @(posedge clk) begin
    st[0].neg  <= d[W-1];
    st[0].zero <= (d == '0);
    st[0].dmag <= d[W-1] ? W'(-d) : W'(d);
    st[0].rem  <= '0;
    st[0].quo  <= '0;
    st[0].tag  <= in_tag;
  end

  // Stages 1..QW: one quotient bit each. The dividend is 2^(2F): its only set
  // bit is the first one shifted in.
  for (genvar k = 0; k < QW; k++) begin : g_stage
    logic [RW-1:0] sh, df;
    logic          ge;
    assign sh = {st[k].rem[RW-2:0], (k == 0) ? 1'b1 : 1'b0};
    assign ge = (sh >= RW'(st[k].dmag));
    assign df = sh - RW'(st[k].dmag);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) vld[k+1] <= 1'b0;
      else        vld[k+1] <= vld[k];
    end
    always_ff @(posedge clk) begin
      st[k+1].neg  <= st[k].neg;
      st[k+1].zero <= st[k].zero;
      st[k+1].dmag <= st[k].dmag;
      st[k+1].rem  <= ge ? df : sh;
      st[k+1].quo  <= {st[k].quo[QW-2:0], ge};
      st[k+1].tag  <= st[k].tag;
    end
  end

  // Output stage: saturate and apply the sign.
  logic [QW-1:0] qm;
  fx_t           qs;
  assign qm = st[QW].quo;
  always_comb begin
    if (st[QW].zero || qm > QW'(FX_MAX)) qs = st[QW].neg ? FX_MIN : FX_MAX;
    else                                 qs = st[QW].neg ? -fx_t'(qm) : fx_t'(qm);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= vld[QW];
  end
  always_ff @(posedge clk) begin
    q       <= qs;
    out_tag <= st[QW].tag;
  end
endmodule
