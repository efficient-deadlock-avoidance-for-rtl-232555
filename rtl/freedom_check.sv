// freedom_check: the freedom condition F' for one arriving packet.
//
// A packet that the base algorithm sends north may, at the north
// neighbour, make one of the two turns that the "north-last" turn model
// forbids: S->E (clockwise, chk_se) or S->W (counterclockwise, chk_sw).
// The two cases are mutually exclusive, since routes are minimal. F'
// allows the north move only if, in the worst case that every packet
// which could still reach the restricted queue of the neighbour does so
// while that queue is not drained, the queue cannot overflow:
//
//   S->E case: 1 + occ(q'_SE) + occ(q_CN) + occ(q_SN) + occ(q_WN) <= cap
//   S->W case: 1 + occ(q'_SW) + occ(q_CN) + occ(q_SN) + occ(q_EN) <= cap
//
// q'_SE and q'_SW belong to the north neighbour and arrive over the two
// southward occupancy links; q_CN, q_SN, q_WN and q_EN are this router's
// queues feeding its north output. pend_se and pend_sw add the packets that
// higher-priority inputs of this router enqueue into those same north-bound
// queues in the current cycle, so that F' is applied serially over the
// packets of one cycle as the condition requires. When neither turn is
// possible F' is true.
//
// Purely combinational; the formula is the paper's single-flit
// adaptation, with occ() the physical queue occupancy and cap = DEPTH.
module freedom_check #(
  parameter int DEPTH = 8,
  localparam int CW = $clog2(DEPTH + 1)
) (
  input  logic          chk_se,    // S->E turn possible at the north neighbour
  input  logic          chk_sw,    // S->W turn possible at the north neighbour
  input  logic [CW-1:0] occ_nse,   // occupancy of the neighbour's S->E queue
  input  logic [CW-1:0] occ_nsw,   // occupancy of the neighbour's S->W queue
  input  logic [CW-1:0] occ_cn,    // local C->N queue
  input  logic [CW-1:0] occ_sn,    // local S->N queue (straight)
  input  logic [CW-1:0] occ_wn,    // local W->N queue (counterclockwise)
  input  logic [CW-1:0] occ_en,    // local E->N queue (clockwise)
  input  logic [2:0]    pend_se,   // same-cycle earlier enqueues into CN/SN/WN
  input  logic [2:0]    pend_sw,   // same-cycle earlier enqueues into CN/SN/EN
  output logic          f_ok
);

  localparam int SW_ = CW + 3;

  logic [SW_-1:0] sum_se, sum_sw;

  always_comb begin
    sum_se = SW_'(1) + SW_'(occ_nse) + SW_'(occ_cn) + SW_'(occ_sn) + SW_'(occ_wn) + SW_'(pend_se);
    sum_sw = SW_'(1) + SW_'(occ_nsw) + SW_'(occ_cn) + SW_'(occ_sn) + SW_'(occ_en) + SW_'(pend_sw);
    if (chk_se)      f_ok = (sum_se <= SW_'(DEPTH));
    else if (chk_sw) f_ok = (sum_sw <= SW_'(DEPTH));
    else             f_ok = 1'b1;
  end

endmodule
