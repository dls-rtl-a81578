// tb_pc_ctrl: directed self-checking test of the private cache controller
// (4 sets x 2 ways here). The testbench plays the core and the LLC. It walks
// the block through the DLS transitions and checks each message and result:
// load miss (Read/RepExc -> EXC), 3-cycle hits, store to EXC (Upgrade/
// AckChange -> MOD), ShdIntervention (MOD -> EXC, AckData), ExcIntervention
// (-> SHD), store to SHD (RdEx/RepExc -> MOD at once), synchronization
// (SHD -> SUS), a SUS load whose check succeeds and one whose block turned
// out stale, eviction of a MOD block (Replace with data) with an
// intervention answered from the write-back buffer, and an intervention
// that must wait for the reply of a pending Read to the same block.
module tb_pc_ctrl;
  import dls_pkg::*;
  localparam int unsigned ME = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic core_req_valid, core_req_ready, core_resp_valid, core_resp_spec;
  logic core_chk_valid, core_chk_ok;
  core_op_e core_req_op;
  logic [ADDR_W-1:0] core_req_addr;
  word_t core_req_wdata, core_resp_rdata, core_chk_data;
  logic [7:0] core_req_wstrb;
  logic req_valid, req_ready, rsp_valid, rsp_ready, fwd_valid, fwd_ready, rin_valid, rin_ready;
  msg_t req_msg, rsp_msg, fwd_msg, rin_msg;

  pc_ctrl #(.MY_ID(ME), .SETS(4), .WAYS(2), .HIT_LAT(3)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  function automatic line_t pat(laddr_t a, int v);
    line_t l;
    for (int w = 0; w < 8; w++) l[w*64 +: 64] = {32'(v), 6'd0, a};
    return l;
  endfunction

  // ---- core side ----
  word_t r_data; logic r_spec; int r_lat; logic c_ok; word_t c_data;
  task automatic core(core_op_e op, laddr_t a, int w, word_t d = '0, logic [7:0] be = 8'hFF);
    int t0;
    @(negedge clk);
    core_req_valid = 1; core_req_op = op; core_req_addr = {a, 3'(w), 3'b0};
    core_req_wdata = d; core_req_wstrb = be;
    while (!core_req_ready) @(negedge clk);
    @(negedge clk);
    t0 = cyc; core_req_valid = 0;
  endtask
  task automatic wait_resp();
    int t0;
    t0 = cyc;
    while (!core_resp_valid) @(negedge clk);
    r_data = core_resp_rdata; r_spec = core_resp_spec; r_lat = cyc - t0;
  endtask
  task automatic wait_chk();
    while (!core_chk_valid) @(negedge clk);
    c_ok = core_chk_ok; c_data = core_chk_data;
  endtask

  // ---- LLC side ----
  msg_t got;
  bit   req_ok = 0;  // a reply is only sent for a request that was seen
  task automatic expect_req(msg_type_e t, laddr_t a, string what);
    int n = 0;
    while (!req_valid && n < 100) begin @(negedge clk); n++; end
    got = req_msg;
    check(req_valid && req_msg.hdr.typ == t && req_msg.hdr.addr == a && req_msg.hdr.dst_llc
          && req_msg.hdr.dst == home_bank(a) && req_msg.hdr.src == id_t'(ME), what);
    req_ok = req_valid && req_msg.hdr.typ == t;
    @(negedge clk);
  endtask
  task automatic send(bit fwd, msg_type_e t, laddr_t a, line_t d);
    msg_t m;
    m.hdr.typ = t; m.hdr.src = home_bank(a); m.hdr.dst = id_t'(ME); m.hdr.dst_llc = 0;
    m.hdr.has_data = (t == M_REP_SHD || t == M_REP_EXC); m.hdr.addr = a; m.data = d;
    if (!fwd && !req_ok) return;
    if (!fwd) req_ok = 0;
    @(negedge clk);
    if (fwd) begin fwd_valid = 1; fwd_msg = m; end
    else     begin rin_valid = 1; rin_msg = m; end
    do @(posedge clk); while (!(fwd ? fwd_ready : rin_ready));
    @(negedge clk);
    if (fwd) fwd_valid = 0; else rin_valid = 0;
  endtask
  task automatic expect_ack(laddr_t a, line_t d, string what);
    int n = 0;
    while (!rsp_valid && n < 100) begin @(negedge clk); n++; end
    check(rsp_valid && rsp_msg.hdr.typ == M_ACK_DATA && rsp_msg.hdr.addr == a &&
          rsp_msg.hdr.dst_llc && rsp_msg.data == d, what);
    @(negedge clk);
  endtask

  laddr_t A = 26'h100, B = 26'h104, C = 26'h108, D = 26'h101, E = 26'h105;
  line_t  la, lb;

  initial begin
    core_req_valid = 0; core_req_op = OP_LOAD; core_req_addr = '0; core_req_wdata = '0;
    core_req_wstrb = '0; req_ready = 1; rsp_ready = 1; fwd_valid = 0; rin_valid = 0;
    fwd_msg = '0; rin_msg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. load miss, no owner -> RepExc -> EXC
    la = pat(A, 1);
    core(OP_LOAD, A, 2);
    expect_req(M_READ, A, "load miss sends Read");
    send(0, M_REP_EXC, A, la);
    wait_resp();
    check(r_data == la[2*64 +: 64] && !r_spec, "load miss data");
    // 2. hit, 3 cycles
    core(OP_LOAD, A, 5); wait_resp();
    check(r_data == la[5*64 +: 64] && r_lat == 3, "load hit in 3 cycles");
    // 3. store to EXC -> Upgrade, write after AckChange
    core(OP_STORE, A, 1, 64'hAAAA_0001);
    expect_req(M_UPGRADE, A, "store to EXC sends Upgrade");
    send(0, M_ACK_CHANGE, A, '0);
    wait_resp();
    la[1*64 +: 64] = 64'hAAAA_0001;
    core(OP_LOAD, A, 1); wait_resp();
    check(r_data == 64'hAAAA_0001 && r_lat == 3, "stored word read back");
    // store hit in MOD: no message, 3 cycles
    core(OP_STORE, A, 3, 64'h1234_5678_9ABC_DEF0, 8'h0F); wait_resp();
    la[3*64 +: 32] = 32'h9ABC_DEF0;
    check(r_lat == 3 && !req_valid, "store hit in MOD");
    // 4. ShdIntervention: MOD -> EXC, AckData with the newest block
    send(1, M_SHD_INT, A, '0);
    expect_ack(A, la, "ShdIntervention answered with the MOD data");
    core(OP_STORE, A, 0, 64'h5);
    expect_req(M_UPGRADE, A, "after ShdIntervention the block is EXC");
    send(0, M_ACK_CHANGE, A, '0);
    wait_resp();
    la[0 +: 64] = 64'h5;
    // 5. ExcIntervention: -> SHD
    send(1, M_EXC_INT, A, '0);
    expect_ack(A, la, "ExcIntervention answered with data");
    core(OP_LOAD, A, 0); wait_resp();
    check(r_data == 64'h5 && r_lat == 3, "SHD block still loads");
    core(OP_STORE, A, 4, 64'h44);
    expect_req(M_RDEX, A, "store to SHD sends RdEx");
    la = pat(A, 7);
    send(0, M_REP_EXC, A, la);
    wait_resp();
    la[4*64 +: 64] = 64'h44;
    core(OP_LOAD, A, 4); wait_resp();
    check(r_data == 64'h44 && r_lat == 3, "RdEx store written on RepExc");
    // 6. shared block B
    lb = pat(B, 2);
    core(OP_LOAD, B, 6);
    expect_req(M_READ, B, "Read for B");
    send(0, M_REP_SHD, B, lb);
    wait_resp();
    check(r_data == lb[6*64 +: 64], "B loaded shared");
    // 7. sync -> SUS; speculative load, check passes
    core(OP_SYNC, A, 0); wait_resp();
    core(OP_LOAD, B, 6); wait_resp();
    check(r_spec && r_data == lb[6*64 +: 64] && r_lat == 3, "SUS load returns speculative data in 3 cycles");
    expect_req(M_READ, B, "SUS load sends Read");
    send(0, M_REP_SHD, B, lb);
    wait_chk();
    check(c_ok, "speculation on an up-to-date SUS block commits");
    core(OP_LOAD, B, 6); wait_resp();
    check(!r_spec && r_lat == 3, "block back to SHD");
    // the MOD block A is not affected by sync
    core(OP_STORE, A, 4, 64'h45); wait_resp();
    check(r_lat == 3, "MOD block untouched by sync");
    la[4*64 +: 64] = 64'h45;
    // 8. stale SUS block
    core(OP_SYNC, A, 0); wait_resp();
    core(OP_LOAD, B, 7); wait_resp();
    check(r_spec && r_data == lb[7*64 +: 64], "second SUS load speculative");
    expect_req(M_READ, B, "SUS load sends Read");
    lb = pat(B, 9);
    send(0, M_REP_SHD, B, lb);
    wait_chk();
    check(!c_ok && c_data == lb[7*64 +: 64], "stale SUS block squashes with the newest word");
    core(OP_LOAD, B, 7); wait_resp();
    check(!r_spec && r_data == lb[7*64 +: 64], "refilled block holds the newest data");
    // 9. C evicts A (MOD): Replace with data, intervention served from buffer
    core(OP_LOAD, C, 0);
    expect_req(M_REPLACE, A, "eviction of MOD block sends Replace");
    check(got.hdr.has_data && got.data == la, "Replace carries the MOD data");
    send(1, M_EXC_INT, A, '0);
    expect_ack(A, la, "intervention during Replace answered from write-back buffer");
    send(0, M_ACK_CHANGE, A, '0);
    expect_req(M_READ, C, "miss request after AckChange");
    send(0, M_REP_EXC, C, pat(C, 3));
    wait_resp();
    check(r_data == pat(C, 3)[63:0], "C loaded");
    // 10. store miss
    core(OP_STORE, D, 2, 64'hD);
    expect_req(M_RDEX, D, "store miss sends RdEx");
    send(0, M_REP_EXC, D, pat(D, 4));
    wait_resp();
    // 11. intervention for a block whose Read is pending waits for the reply
    core(OP_LOAD, E, 1);
    expect_req(M_READ, E, "Read for E");
    fork
      send(1, M_EXC_INT, E, '0);
    join_none
    repeat (15) begin @(negedge clk); check(!rsp_valid, "intervention deferred while Read pending"); end
    send(0, M_REP_EXC, E, pat(E, 5));
    wait_resp();
    expect_ack(E, pat(E, 5), "deferred intervention answered after the reply");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
