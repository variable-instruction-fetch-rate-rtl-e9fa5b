// eager_scheduler: the eager thread policy scheduler.
//
// Each cycle it reads the path confidence of every live entry of the thread
// management table and decides which paths fetch and how many instructions
// each gets out of the fetch width FW. It first ranks the live paths: PORTS
// rounds of "largest confidence not yet chosen" (a priority encoder; on a
// tie the lower ID wins), one round per instruction-cache port. Then:
//
//  * selective DEE: the first FW/TW ranked paths fetch TW instructions each
//    (32-wide fetch, 8 per path: 4 paths), as in the paper's example;
//  * dynamic DEE (variable fetch rate): the ranked paths share FW in
//    proportion to their confidences, n_i = round(FW * c_i / sum c), the
//    rounding remainder going to the most confident path, so the shares add
//    up to FW exactly. Confidences 0.8 and 0.2 give 26 and 6 of 32. If every
//    ranked confidence is 0 the width is split evenly.
//
// A path whose share is 0 does not fetch. Limiting the paths that fetch in
// one cycle to the number of cache ports, the tie rule and the rounding are
// this design's choices. Purely combinational: sel_* are valid in the cycle
// the confidences are.
module eager_scheduler #(
  parameter int unsigned ID_W   = 20,
  parameter int unsigned CONF_W = 16,
  parameter int unsigned FW     = 32,
  parameter int unsigned TW     = 8,
  parameter int unsigned PORTS  = 4,
  parameter int unsigned N      = 1 << ID_W,
  parameter int unsigned CNT_W  = $clog2(FW + 1)
) (
  input  mp_pkg::fetch_policy_e policy,
  input  logic [N-1:0]          valid,
  input  logic [CONF_W-1:0]     conf [N],
  output logic [PORTS-1:0]      sel_valid,
  output logic [ID_W-1:0]       sel_id    [PORTS],
  output logic [CNT_W-1:0]      sel_count [PORTS]
);
  import mp_pkg::*;

  localparam int unsigned SEL_MAX = FW / TW;           // selective: paths per cycle
  localparam int unsigned SUM_W   = CONF_W + $clog2(PORTS + 1);
  localparam int unsigned NUM_W   = CONF_W + CNT_W + 1;

  logic [PORTS-1:0]  ranked;
  logic [ID_W-1:0]   rid   [PORTS];
  logic [CONF_W-1:0] rconf [PORTS];
  logic [N-1:0]      taken_m;

  // ranking: PORTS rounds of maximum search
  always_comb begin
    taken_m = '0;
    for (int unsigned p = 0; p < PORTS; p++) begin
      ranked[p] = 1'b0;
      rid[p]    = '0;
      rconf[p]  = '0;
      for (int unsigned j = 0; j < N; j++)
        if (valid[j] && !taken_m[j] && (!ranked[p] || conf[j] > rconf[p])) begin
          ranked[p] = 1'b1;
          rid[p]    = ID_W'(j);
          rconf[p]  = conf[j];
        end
      if (ranked[p]) taken_m[rid[p]] = 1'b1;
    end
  end

  // allocation
  logic [SUM_W-1:0] sum;
  logic [CNT_W:0]   nsel;
  logic [CNT_W+1:0] total;
  logic [NUM_W-1:0] num;
  logic [CNT_W:0]   share [PORTS];

  always_comb begin
    sum  = '0;
    nsel = '0;
    for (int unsigned p = 0; p < PORTS; p++)
      if (ranked[p]) begin
        sum  = sum + SUM_W'(rconf[p]);
        nsel = nsel + 1'b1;
      end
    total = '0;
    for (int unsigned p = 0; p < PORTS; p++) begin
      share[p] = '0;
      num      = '0;
      if (ranked[p]) begin
        if (policy == POL_SELECTIVE) begin
          share[p] = (p < SEL_MAX) ? (CNT_W+1)'(TW) : '0;
        end else if (sum != '0) begin
          num      = NUM_W'(FW) * NUM_W'(rconf[p]) + NUM_W'(sum >> 1);
          share[p] = (CNT_W+1)'(num / NUM_W'(sum));
        end else begin
          share[p] = (CNT_W+1)'(FW) / nsel;
        end
      end
      total = total + (CNT_W+2)'(share[p]);
    end
    // rounding remainder to the most confident path (dynamic policy only)
    if (policy == POL_DYNAMIC && ranked[0])
      share[0] = (CNT_W+1)'((CNT_W+2)'(share[0]) + (CNT_W+2)'(FW) - total);
    for (int unsigned p = 0; p < PORTS; p++) begin
      sel_id[p]    = rid[p];
      sel_count[p] = CNT_W'(share[p]);
      sel_valid[p] = ranked[p] && share[p] != '0;
    end
  end

  initial assert (SEL_MAX <= PORTS) else $error("selective DEE needs FW/TW <= PORTS");
endmodule
