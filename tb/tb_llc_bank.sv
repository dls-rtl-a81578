// tb_llc_bank: directed self-checking test of one LLC bank (id 5, 4 sets x
// 2 ways here, 10-cycle access) with the behavioural memory model. The
// testbench plays the cores: it sends requests, answers interventions with
// AckData and checks every reply against the DLS rules: a miss refills from
// memory and grants EXC (RepExc) to a Read when there is no owner; a Read of
// an owned EXC block gets RepShd straight from the LLC in 10 cycles; a Read
// of a MOD block triggers ShdIntervention; RdEx triggers ExcIntervention and
// moves the owner; Upgrade from the owner gets AckChange, from a non-owner is
// served as RdEx; Replace clears the owner and keeps the written data;
// an eviction recalls the owner's copy and writes the dirty block back.
module tb_llc_bank;
  import dls_pkg::*;
  localparam int unsigned ME = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic init_done, req_valid, req_ready, fwd_valid, fwd_ready, rsp_valid, rsp_ready;
  logic rin_valid, rin_ready;
  msg_t req_msg, fwd_msg, rsp_msg, rin_msg;
  logic   mem_req_valid [1], mem_req_ready [1], mem_req_we [1], mem_rsp_valid [1];
  laddr_t mem_req_addr [1];
  line_t  mem_req_wdata [1], mem_rsp_data [1];

  llc_bank #(.MY_ID(ME), .SETS(4), .WAYS(2), .LAT(10)) dut (
    .clk, .rst_n, .init_done,
    .req_valid, .req_ready, .req_msg, .fwd_valid, .fwd_ready, .fwd_msg,
    .rsp_valid, .rsp_ready, .rsp_msg, .rin_valid, .rin_ready, .rin_msg,
    .mem_req_valid(mem_req_valid[0]), .mem_req_ready(mem_req_ready[0]),
    .mem_req_we(mem_req_we[0]), .mem_req_addr(mem_req_addr[0]),
    .mem_req_wdata(mem_req_wdata[0]), .mem_rsp_valid(mem_rsp_valid[0]),
    .mem_rsp_data(mem_rsp_data[0]));
  dls_mem_model #(.NB(1), .LAT(20)) u_mem (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask
  function automatic line_t pat(int v);
    line_t l;
    for (int w = 0; w < 8; w++) l[w*64 +: 64] = {32'(v), 32'(w)};
    return l;
  endfunction

  int t_acc;
  task automatic request(msg_type_e t, int src, laddr_t a, line_t d = '0, logic hd = 0);
    @(negedge clk);
    req_valid = 1;
    req_msg.hdr.typ = t; req_msg.hdr.src = id_t'(src); req_msg.hdr.dst = id_t'(ME);
    req_msg.hdr.dst_llc = 1; req_msg.hdr.has_data = hd; req_msg.hdr.addr = a; req_msg.data = d;
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    t_acc = cyc;
    req_valid = 0;
  endtask

  msg_t r;
  int   r_lat;
  task automatic expect_rsp(msg_type_e t, int dst, laddr_t a, line_t d, bit chkd, string what);
    int n = 0;
    while (!rsp_valid && n < 500) begin @(negedge clk); n++; end
    r = rsp_msg; r_lat = cyc - t_acc;
    check(rsp_valid && r.hdr.typ == t && r.hdr.dst == id_t'(dst) && !r.hdr.dst_llc &&
          r.hdr.addr == a && (!chkd || r.data == d), what);
    @(negedge clk);
  endtask
  task automatic expect_fwd(msg_type_e t, int dst, laddr_t a, line_t reply, string what);
    int n = 0;
    while (!fwd_valid && n < 500) begin @(negedge clk); n++; end
    check(fwd_valid && fwd_msg.hdr.typ == t && fwd_msg.hdr.dst == id_t'(dst) &&
          fwd_msg.hdr.addr == a, what);
    check(!rsp_valid, "no reply before the AckData");
    @(negedge clk);
    // the owner answers
    repeat (3) @(negedge clk);
    rin_valid = 1;
    rin_msg.hdr.typ = M_ACK_DATA; rin_msg.hdr.src = id_t'(dst); rin_msg.hdr.dst = id_t'(ME);
    rin_msg.hdr.dst_llc = 1; rin_msg.hdr.has_data = 1; rin_msg.hdr.addr = a; rin_msg.data = reply;
    while (!rin_ready) @(negedge clk);
    @(negedge clk);
    rin_valid = 0;
  endtask

  laddr_t X = 26'h0005, Y = 26'h0045, Z = 26'h0085;

  initial begin
    req_valid = 0; req_msg = '0; fwd_ready = 1; rsp_ready = 1; rin_valid = 0; rin_msg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (init_done);
    // 1. miss, no owner
    request(M_READ, 1, X);
    expect_rsp(M_REP_EXC, 1, X, u_mem.init_line(X), 1, "Read miss refills and grants RepExc");
    check(u_mem.reads == 1, "one memory read");
    // 2. Read of an owned EXC block: RepShd from LLC data, 10 cycles
    request(M_READ, 2, X);
    expect_rsp(M_REP_SHD, 2, X, u_mem.init_line(X), 1, "Read of owned EXC block gets RepShd");
    check(r_lat == 10, $sformatf("LLC hit latency %0d, expected 10", r_lat));
    // 3. Upgrade from the owner
    request(M_UPGRADE, 1, X);
    expect_rsp(M_ACK_CHANGE, 1, X, '0, 0, "Upgrade from owner gets AckChange");
    // 4. Read of the MOD block: ShdIntervention to owner 1
    request(M_READ, 2, X);
    expect_fwd(M_SHD_INT, 1, X, pat(1), "Read of MOD block sends ShdIntervention");
    expect_rsp(M_REP_SHD, 2, X, pat(1), 1, "RepShd forwards the owner's data");
    // 5. RdEx: ExcIntervention to owner 1, owner becomes 3
    request(M_RDEX, 3, X);
    expect_fwd(M_EXC_INT, 1, X, pat(1), "RdEx sends ExcIntervention to the owner");
    expect_rsp(M_REP_EXC, 3, X, pat(1), 1, "RdEx answered with RepExc");
    // 6. Upgrade from a non-owner is served as RdEx
    request(M_UPGRADE, 1, X);
    expect_fwd(M_EXC_INT, 3, X, pat(2), "stale Upgrade recalls from the new owner");
    expect_rsp(M_REP_EXC, 1, X, pat(2), 1, "stale Upgrade answered with RepExc");
    // 7. Replace from the owner clears the owner field
    request(M_REPLACE, 1, X, pat(3), 1);
    expect_rsp(M_ACK_CHANGE, 1, X, '0, 0, "Replace gets AckChange");
    request(M_READ, 4, X);
    expect_rsp(M_REP_EXC, 4, X, pat(3), 1, "after Replace: no owner, RepExc with replaced data");
    // 8. Replace from a non-owner changes nothing
    request(M_REPLACE, 2, X, pat(99), 1);
    expect_rsp(M_ACK_CHANGE, 2, X, '0, 0, "stale Replace gets AckChange");
    request(M_READ, 9, X);
    expect_rsp(M_REP_SHD, 9, X, pat(3), 1, "stale Replace data ignored, owner kept");
    // 9. fill the other way of the set
    request(M_READ, 6, Y);
    expect_rsp(M_REP_EXC, 6, Y, u_mem.init_line(Y), 1, "second block of the set");
    // 10. third block: evict X, recall it from owner 4, write back
    request(M_RDEX, 7, Z);
    expect_fwd(M_EXC_INT, 4, X, pat(4), "eviction recalls the owner's copy");
    expect_rsp(M_REP_EXC, 7, Z, u_mem.init_line(Z), 1, "RdEx miss granted after eviction");
    check(u_mem.writes == 1 && u_mem.peek(X) == pat(4), "dirty victim written back");
    // 11. X again comes from memory with the written-back data
    request(M_READ, 8, X);
    expect_fwd(M_EXC_INT, 6, Y, pat(6), "second eviction recalls Y from its owner");
    expect_rsp(M_REP_EXC, 8, X, pat(4), 1, "refill returns the written-back data");
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
