// ni_rx: flit-to-message assembler of a network interface.
// Flits ejected by the local port of a mesh router are written into a
// DEPTH-entry buffer (the router only sends against credits, so it never
// overflows). The assembler pops the head flit (header) and any body flits
// into one message and offers it on a valid/ready handshake; while a message
// waits to be taken nothing more is popped. One credit is returned on
// credit_out for every flit popped.
module ni_rx
  import dls_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  flit_valid,
  input  flit_t flit,
  output logic  credit_out,
  output logic  msg_valid,
  input  logic  msg_ready,
  output msg_t  msg
);
  localparam int unsigned PTR_W = $clog2(DEPTH);
  localparam int unsigned CNT_W = $clog2(DEPTH+1);

  flit_t            buf_q [DEPTH];
  logic [PTR_W-1:0] wr_q, rd_q;
  logic [CNT_W-1:0] cnt_q;
  logic [2:0]       idx_q;
  logic             pop;
  flit_t            f;

  assign f   = buf_q[rd_q];
  assign pop = (cnt_q != '0) && !(msg_valid && !msg_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_q       <= '0;
      rd_q       <= '0;
      cnt_q      <= '0;
      idx_q      <= '0;
      msg_valid  <= 1'b0;
      msg        <= '0;
      credit_out <= 1'b0;
    end else begin
      if (flit_valid) begin
        buf_q[wr_q] <= flit;
        wr_q <= (wr_q == PTR_W'(DEPTH-1)) ? '0 : wr_q + 1'b1;
      end
      cnt_q      <= cnt_q + CNT_W'(flit_valid) - CNT_W'(pop);
      credit_out <= pop;
      if (msg_valid && msg_ready) msg_valid <= 1'b0;
      if (pop) begin
        rd_q <= (rd_q == PTR_W'(DEPTH-1)) ? '0 : rd_q + 1'b1;
        if (f.head) begin
          msg.hdr <= hdr_t'(f.payload[HDR_W-1:0]);
          idx_q   <= 3'd1;
        end else begin
          msg.data[(int'(idx_q)-1)*FLIT_W +: FLIT_W] <= f.payload;
          idx_q <= idx_q + 3'd1;
        end
        if (f.tail) msg_valid <= 1'b1;
      end
    end
  end
endmodule
