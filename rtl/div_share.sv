// div_share: staggered sharing of fully pipelined dividers among the Minv
// backward units.
//
// Each backward unit Mb_i issues one divisor D_i alpha_{i+1} per task. A Mb
// unit that accepts a task every II cycles uses a one-result-per-cycle divider
// only once in II cycles, so G = II units share one divider: the N units are
// split into ceil(N/G) consecutive groups (units 0..G-1, G..2G-1, ...), each
// with one pipelined_divider. Every unit has a small request queue; each
// cycle a round-robin arbiter per group issues the oldest request of one
// non-empty queue. With tasks issued exactly every II cycles the requests of
// a group already arrive in different cycles (the staggered sequence of the
// design's divider input), so no request waits; otherwise the queues absorb
// the collision. Results, tagged with the unit index, are written to the
// unit's result FIFO, read by the matching forward unit Mf_i.
//
// Interface: req_valid/req_d per unit; res_empty/res_q/res_pop per unit
// (first-word-fall-through). arb_wait pulses in a cycle in which a request
// had to wait because its divider served another unit.
// Timing: divider latency plus one queue cycle. Queue and FIFO depths are
// this implementation's choices.
module div_share
  import draco_pkg::*;
#(
  parameter int unsigned N      = 7,
  parameter int unsigned G      = 3,   // Mb units per divider (= Mb II)
  parameter int unsigned QDEPTH = 4,
  parameter int unsigned RDEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [N-1:0] req_valid,
  input  fx_t [N-1:0]  req_d,
  input  logic [N-1:0] res_pop,
  output logic [N-1:0] res_empty,
  output fx_t [N-1:0]  res_q,
  output logic        arb_wait
);
  localparam int unsigned ND    = (N + G - 1) / G;
  localparam int unsigned TAG_W = (N > 1) ? $clog2(N) : 1;

  logic [N-1:0] q_empty, q_pop;
  fx_t  [N-1:0] q_dout;
  logic [ND-1:0] d_wait;

  for (genvar u = 0; u < N; u++) begin : g_q
    logic full;
    logic [$clog2(QDEPTH+1)-1:0] cnt;
    sync_fifo #(.T(fx_t), .DEPTH(QDEPTH)) u_req (
      .clk, .rst_n,
      .push (req_valid[u]),
      .din  (req_d[u]),
      .pop  (q_pop[u]),
      .dout (q_dout[u]),
      .empty(q_empty[u]),
      .full (full),
      .count(cnt)
    );
  end

  logic [ND-1:0]            dv_out;
  fx_t  [ND-1:0]            dq_out;
  logic [ND-1:0][TAG_W-1:0] dtag_out;

  for (genvar g = 0; g < ND; g++) begin : g_div
    localparam int unsigned LO = g * G;
    localparam int unsigned HI = ((g + 1) * G < N) ? (g + 1) * G : N;  // exclusive
    localparam int unsigned GS = HI - LO;

    logic [$clog2(G+1)-1:0] rr;      // unit served last, relative to LO
    logic                   issue;
    logic [TAG_W-1:0]       sel;
    logic [$clog2(G+1)-1:0] sel_rel;
    int unsigned            nreq;

    always_comb begin
      issue   = 1'b0;
      sel_rel = '0;
      nreq    = 0;
      for (int k = 0; k < GS; k++) if (!q_empty[LO+k]) nreq++;
      // search starting after the last served unit
      for (int k = GS; k >= 1; k--) begin
        int unsigned cand;
        cand = (int'(rr) + k) % GS;
        if (!q_empty[LO+cand]) begin
          issue   = 1'b1;
          sel_rel = ($clog2(G+1))'(cand);
        end
      end
      sel = TAG_W'(LO + sel_rel);
    end
    assign d_wait[g] = (nreq > 1);

    for (genvar k = 0; k < GS; k++) begin : g_pop
      assign q_pop[LO+k] = issue && (sel_rel == ($clog2(G+1))'(k));
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)     rr <= ($clog2(G+1))'(GS - 1);
      else if (issue) rr <= sel_rel;
    end

    pipelined_divider #(.TAG_W(TAG_W)) u_div (
      .clk, .rst_n,
      .in_valid (issue),
      .d        (q_dout[sel]),
      .in_tag   (sel),
      .out_valid(dv_out[g]),
      .q        (dq_out[g]),
      .out_tag  (dtag_out[g])
    );

    for (genvar k = 0; k < GS; k++) begin : g_res
      logic full;
      logic [$clog2(RDEPTH+1)-1:0] cnt;
      sync_fifo #(.T(fx_t), .DEPTH(RDEPTH)) u_res (
        .clk, .rst_n,
        .push (dv_out[g] && (dtag_out[g] == TAG_W'(LO + k))),
        .din  (dq_out[g]),
        .pop  (res_pop[LO+k]),
        .dout (res_q[LO+k]),
        .empty(res_empty[LO+k]),
        .full (full),
        .count(cnt)
      );
    end
  end

  assign arb_wait = |d_wait;
endmodule
