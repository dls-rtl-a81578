// dls_ni: network interface of one tile. The tile's private cache and LLC
// bank exchange DLS coherence messages over three physically separate meshes,
// one per message class, so that a reply can never be blocked behind a
// request (protocol-deadlock freedom):
//   REQ  (Read, RdEx, Upgrade, Replace)      private cache -> LLC bank
//   FWD  (ShdIntervention, ExcIntervention)  LLC bank -> private cache
//   RESP (RepShd, RepExc, AckChange, AckData) both directions
// REQ and FWD each have one sender and one receiver per tile. On RESP the
// cache's and the bank's outgoing messages share the injection port under a
// message-granular round-robin, and an ejected message goes to the bank or
// the cache by its header's dst_llc bit. All message ports are valid/ready.
// The message types follow the protocol; the three-network split is this
// design's choice (the paper does not say how its network avoids deadlock).
module dls_ni
  import dls_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  // private cache side
  input  logic  pc_req_valid,   output logic pc_req_ready,   input  msg_t pc_req,
  input  logic  pc_rsp_valid,   output logic pc_rsp_ready,   input  msg_t pc_rsp,
  output logic  pc_fwd_valid,   input  logic pc_fwd_ready,   output msg_t pc_fwd,
  output logic  pc_rin_valid,   input  logic pc_rin_ready,   output msg_t pc_rin,
  // LLC bank side
  output logic  llc_req_valid,  input  logic llc_req_ready,  output msg_t llc_req,
  input  logic  llc_fwd_valid,  output logic llc_fwd_ready,  input  msg_t llc_fwd,
  input  logic  llc_rsp_valid,  output logic llc_rsp_ready,  input  msg_t llc_rsp,
  output logic  llc_rin_valid,  input  logic llc_rin_ready,  output msg_t llc_rin,
  // router local ports: index 0 REQ, 1 FWD, 2 RESP
  output logic  inj_valid [3],  output flit_t inj_flit [3],  input  logic inj_credit [3],
  input  logic  ej_valid  [3],  input  flit_t ej_flit  [3],  output logic ej_credit  [3]
);
  // ---------------- REQ ----------------
  ni_tx #(.DEPTH(DEPTH)) u_req_tx (.clk, .rst_n,
    .msg_valid(pc_req_valid), .msg_ready(pc_req_ready), .msg(pc_req),
    .flit_valid(inj_valid[0]), .flit(inj_flit[0]), .credit_in(inj_credit[0]));
  ni_rx #(.DEPTH(DEPTH)) u_req_rx (.clk, .rst_n,
    .flit_valid(ej_valid[0]), .flit(ej_flit[0]), .credit_out(ej_credit[0]),
    .msg_valid(llc_req_valid), .msg_ready(llc_req_ready), .msg(llc_req));

  // ---------------- FWD ----------------
  ni_tx #(.DEPTH(DEPTH)) u_fwd_tx (.clk, .rst_n,
    .msg_valid(llc_fwd_valid), .msg_ready(llc_fwd_ready), .msg(llc_fwd),
    .flit_valid(inj_valid[1]), .flit(inj_flit[1]), .credit_in(inj_credit[1]));
  ni_rx #(.DEPTH(DEPTH)) u_fwd_rx (.clk, .rst_n,
    .flit_valid(ej_valid[1]), .flit(ej_flit[1]), .credit_out(ej_credit[1]),
    .msg_valid(pc_fwd_valid), .msg_ready(pc_fwd_ready), .msg(pc_fwd));

  // ---------------- RESP ----------------
  logic rsp_tx_valid, rsp_tx_ready, pick_llc, rr_q;
  msg_t rsp_tx_msg;

  always_comb begin
    // round-robin: rr_q = 1 gives the LLC bank priority
    if (pc_rsp_valid && llc_rsp_valid) pick_llc = rr_q;
    else                               pick_llc = llc_rsp_valid;
    rsp_tx_valid  = pc_rsp_valid || llc_rsp_valid;
    rsp_tx_msg    = pick_llc ? llc_rsp : pc_rsp;
    pc_rsp_ready  = rsp_tx_ready && !pick_llc;
    llc_rsp_ready = rsp_tx_ready &&  pick_llc;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr_q <= 1'b0;
    else if (rsp_tx_valid && rsp_tx_ready) rr_q <= !pick_llc;
  end

  ni_tx #(.DEPTH(DEPTH)) u_rsp_tx (.clk, .rst_n,
    .msg_valid(rsp_tx_valid), .msg_ready(rsp_tx_ready), .msg(rsp_tx_msg),
    .flit_valid(inj_valid[2]), .flit(inj_flit[2]), .credit_in(inj_credit[2]));

  logic rsp_rx_valid, rsp_rx_ready;
  msg_t rsp_rx_msg;
  ni_rx #(.DEPTH(DEPTH)) u_rsp_rx (.clk, .rst_n,
    .flit_valid(ej_valid[2]), .flit(ej_flit[2]), .credit_out(ej_credit[2]),
    .msg_valid(rsp_rx_valid), .msg_ready(rsp_rx_ready), .msg(rsp_rx_msg));

  assign pc_rin        = rsp_rx_msg;
  assign llc_rin       = rsp_rx_msg;
  assign pc_rin_valid  = rsp_rx_valid && !rsp_rx_msg.hdr.dst_llc;
  assign llc_rin_valid = rsp_rx_valid &&  rsp_rx_msg.hdr.dst_llc;
  assign rsp_rx_ready  = rsp_rx_msg.hdr.dst_llc ? llc_rin_ready : pc_rin_ready;

endmodule
