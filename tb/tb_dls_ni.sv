// tb_dls_ni: self-checking test of the tile network interface. The three
// injection ports are looped back to the three ejection ports through a
// register stage, with credits returned the same way, so every message sent
// by the cache or the bank comes back to the tile. Random control and data
// messages are offered on all four sending ports at once while the four
// receiving ports apply random back-pressure. Each receiver checks that it
// gets exactly the messages meant for it (REQ -> bank, FWD -> cache, RESP
// split by dst_llc), in order and with their data intact.
module tb_dls_ni;
  import dls_pkg::*;
  localparam int NMSG = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic pc_req_valid, pc_req_ready, pc_rsp_valid, pc_rsp_ready, pc_fwd_valid, pc_fwd_ready;
  logic pc_rin_valid, pc_rin_ready, llc_req_valid, llc_req_ready, llc_fwd_valid, llc_fwd_ready;
  logic llc_rsp_valid, llc_rsp_ready, llc_rin_valid, llc_rin_ready;
  msg_t pc_req, pc_rsp, pc_fwd, pc_rin, llc_req, llc_fwd, llc_rsp, llc_rin;
  logic  inj_valid [3], inj_credit [3], ej_valid [3], ej_credit [3];
  flit_t inj_flit [3], ej_flit [3];

  dls_ni #(.DEPTH(8)) dut (.*);

  // loopback "network": one register stage each way
  always_ff @(posedge clk) begin
    for (int k = 0; k < 3; k++) begin
      ej_valid[k]   <= rst_n && inj_valid[k];
      ej_flit[k]    <= inj_flit[k];
      inj_credit[k] <= rst_n && ej_credit[k];
    end
  end

  int checks = 0, failures = 0;

  function automatic msg_t gen(int stream, int k);
    msg_t m;
    m.hdr.typ      = msg_type_e'(4'(stream * 2 + (k % 2)));
    m.hdr.src      = id_t'(k);
    m.hdr.dst      = id_t'(0);
    m.hdr.dst_llc  = (stream == 0 || stream == 2);  // streams 0,2 go to the bank
    m.hdr.has_data = (k % 3) != 0;
    m.hdr.addr     = laddr_t'(k * 977 + stream);
    m.data         = m.hdr.has_data ? {16{stream[3:0], 4'(k), 24'(k * 31)}} : '0;
    return m;
  endfunction

  // senders: 0 pc_req, 1 llc_fwd, 2 pc_rsp, 3 llc_rsp
  int sent [4], rcvd [4];
  always @(negedge clk) if (rst_n) begin
    if (pc_req_valid  && pc_req_ready)  sent[0]++;
    if (llc_fwd_valid && llc_fwd_ready) sent[1]++;
    if (pc_rsp_valid  && pc_rsp_ready)  sent[2]++;
    if (llc_rsp_valid && llc_rsp_ready) sent[3]++;
  end
  always @(negedge clk) begin
    pc_req_valid  = rst_n && sent[0] < NMSG; pc_req  = gen(0, sent[0]);
    llc_fwd_valid = rst_n && sent[1] < NMSG; llc_fwd = gen(1, sent[1]);
    pc_rsp_valid  = rst_n && sent[2] < NMSG; pc_rsp  = gen(2, sent[2]);
    llc_rsp_valid = rst_n && sent[3] < NMSG; llc_rsp = gen(3, sent[3]);
    llc_req_ready = $urandom_range(0, 1);
    pc_fwd_ready  = $urandom_range(0, 1);
    llc_rin_ready = $urandom_range(0, 1);
    pc_rin_ready  = $urandom_range(0, 1);
  end

  task automatic chk(int s, msg_t got);
    msg_t e;
    e = gen(s, rcvd[s]);
    checks++;
    if (got.hdr != e.hdr || (e.hdr.has_data && got.data != e.data)) begin
      failures++; $display("FAIL stream %0d message %0d", s, rcvd[s]);
    end
    rcvd[s]++;
  endtask

  always @(posedge clk) if (rst_n) begin
    if (llc_req_valid && llc_req_ready) chk(0, llc_req);
    if (pc_fwd_valid  && pc_fwd_ready)  chk(1, pc_fwd);
    if (llc_rin_valid && llc_rin_ready) chk(2, llc_rin);
    if (pc_rin_valid  && pc_rin_ready)  chk(3, pc_rin);
  end

  initial begin
    for (int s = 0; s < 4; s++) begin sent[s] = 0; rcvd[s] = 0; end
    for (int k = 0; k < 3; k++) begin ej_valid[k] = 0; ej_flit[k] = '0; inj_credit[k] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (rcvd[0] == NMSG && rcvd[1] == NMSG && rcvd[2] == NMSG && rcvd[3] == NMSG);
    repeat (5) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog: received %0d %0d %0d %0d", rcvd[0], rcvd[1], rcvd[2], rcvd[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
