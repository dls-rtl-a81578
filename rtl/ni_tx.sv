// ni_tx: message-to-flit serializer of a network interface.
// It takes one coherence message (header + optional 512-bit block) on a
// valid/ready handshake and sends it into the local port of a mesh router
// as a head flit (the header) followed, for messages that carry data, by
// DATA_FLITS body flits of 128 bits, the last one marked tail. A flit is sent
// only while a credit is held; the counter starts at DEPTH (the router's
// local input buffer) and is refilled by credit_in. One flit per cycle.
module ni_tx
  import dls_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  msg_valid,
  output logic  msg_ready,
  input  msg_t  msg,
  output logic  flit_valid,
  output flit_t flit,
  input  logic  credit_in
);
  localparam int unsigned CNT_W = $clog2(DEPTH+1);

  logic             busy_q;
  msg_t             msg_q;
  logic [2:0]       idx_q;      // 0 = head, 1..DATA_FLITS = body
  logic [CNT_W-1:0] cred_q;
  logic             send;
  logic             last;

  assign msg_ready = !busy_q;
  assign send      = busy_q && (cred_q != '0);
  assign last      = !msg_q.hdr.has_data || (idx_q == 3'(DATA_FLITS));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q     <= 1'b0;
      msg_q      <= '0;
      idx_q      <= '0;
      cred_q     <= CNT_W'(DEPTH);
      flit_valid <= 1'b0;
      flit       <= '0;
    end else begin
      flit_valid <= send;
      if (send) begin
        flit.head    <= (idx_q == '0);
        flit.tail    <= last;
        flit.payload <= (idx_q == '0) ? FLIT_W'(msg_q.hdr)
                                      : msg_q.data[(int'(idx_q)-1)*FLIT_W +: FLIT_W];
        idx_q        <= last ? '0 : idx_q + 3'd1;
        if (last) busy_q <= 1'b0;
      end
      if (msg_valid && msg_ready) begin
        busy_q <= 1'b1;
        msg_q  <= msg;
        idx_q  <= '0;
      end
      cred_q <= cred_q - CNT_W'(send) + CNT_W'(credit_in);
    end
  end
endmodule
