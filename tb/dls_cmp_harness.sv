// dls_cmp_harness: end-to-end test of the 16-core DLS chip. Sixteen
// core models run a data-race-free parallel program in phases separated
// by barriers. In each phase every word of a pool of blocks is either owned
// by one core (only it stores to it, and only it or nobody else loads it) or
// read-only. After each barrier every core issues a synchronization, which
// turns its shared blocks suspicious. Every load result is compared with a
// reference memory: a non-speculative result directly, a speculative one
// (from a SUS block) after its check, using the corrected word when the check
// reports a stale block. The pool places several blocks in the same private
// cache set and the same LLC set, so evictions, Replace messages and LLC
// write-backs occur. The harness counts each protocol mechanism and fails if
// one never happened. FULL = 1 instantiates the chip with its default sizes.
module dls_cmp_harness
  import dls_pkg::*;
#(
  parameter bit          FULL     = 1'b0,
  parameter int unsigned PC_SETS  = 2,
  parameter int unsigned PC_WAYS  = 2,
  parameter int unsigned LLC_SETS = 2,
  parameter int unsigned LLC_WAYS = 2,
  parameter int unsigned PHASES   = 8,
  parameter int unsigned OPS      = 40,
  parameter int unsigned KBLK     = 6,     // blocks per bank in the pool
  parameter int unsigned WATCHDOG = 400000
) ();
  localparam int unsigned NPOOL = KBLK * NCORES;
  localparam int unsigned NWORD = NPOOL * 8;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int   cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic     init_done;
  logic     core_req_valid [NCORES];
  logic     core_req_ready [NCORES];
  core_op_e core_req_op    [NCORES];
  logic [ADDR_W-1:0] core_req_addr [NCORES];
  word_t    core_req_wdata [NCORES];
  logic [7:0] core_req_wstrb [NCORES];
  logic     core_resp_valid[NCORES];
  word_t    core_resp_rdata[NCORES];
  logic     core_resp_spec [NCORES];
  logic     core_chk_valid [NCORES];
  logic     core_chk_ok    [NCORES];
  word_t    core_chk_data  [NCORES];
  logic     mem_req_valid  [NCORES];
  logic     mem_req_ready  [NCORES];
  logic     mem_req_we     [NCORES];
  laddr_t   mem_req_addr   [NCORES];
  line_t    mem_req_wdata  [NCORES];
  logic     mem_rsp_valid  [NCORES];
  line_t    mem_rsp_data   [NCORES];

  if (FULL) begin : g_dut
    dls_cmp dut (.*);
  end else begin : g_dut
    dls_cmp #(.PC_SETS(PC_SETS), .PC_WAYS(PC_WAYS), .LLC_SETS(LLC_SETS),
              .LLC_WAYS(LLC_WAYS)) dut (.*);
  end

  dls_mem_model #(.NB(NCORES), .LAT(40)) u_mem (.*);

  int checks = 0, failures = 0;

  // ---------------- pool, ownership and reference ----------------
  // block i of the pool: bank i % 16, "row" i / 16 placed 64K blocks apart
  function automatic laddr_t pool_blk(int unsigned i);
    return laddr_t'(((i / NCORES) << 16) | (i % NCORES));
  endfunction
  function automatic logic [ADDR_W-1:0] word_addr(int unsigned wi);
    return {pool_blk(wi / 8), 3'(wi % 8), 3'b000};
  endfunction

  word_t gold  [NWORD];
  int    owner [NWORD];   // -1: read-only in this phase
  int    arrived = 0;
  int    phase_go = 0;

  initial begin
    for (int w = 0; w < NWORD; w++)
      gold[w] = {32'hC0DE0000 | 32'(w % 8), 6'd0, pool_blk(w / 8)};
  end

  task automatic new_phase(int p);
    for (int w = 0; w < NWORD; w++)
      owner[w] = ($urandom_range(0, 2) == 0) ? -1 : int'($urandom_range(0, NCORES-1));
  endtask

  // ---------------- mechanism counters ----------------
  int n_read, n_rdex, n_upg, n_repl, n_repl_data, n_shdint, n_excint, n_ackdata;
  int n_repshd, n_repexc, n_ackchg, n_recall, n_spec, n_spec_ok, n_spec_bad, n_sync;
  int n_hit, hit_lat_bad;
  int c_read[NCORES], c_rdex[NCORES], c_upg[NCORES], c_repl[NCORES], c_repld[NCORES];
  int c_shd[NCORES], c_exc[NCORES], c_ackd[NCORES], c_rs[NCORES], c_rx[NCORES];
  int c_ac[NCORES], c_rec[NCORES];

  for (genvar n = 0; n < NCORES; n++) begin : g_cnt
    initial begin
      c_read[n]=0; c_rdex[n]=0; c_upg[n]=0; c_repl[n]=0; c_repld[n]=0; c_shd[n]=0;
      c_exc[n]=0; c_ackd[n]=0; c_rs[n]=0; c_rx[n]=0; c_ac[n]=0; c_rec[n]=0;
    end
    always @(posedge clk) begin
      if (g_dut.dut.g_tile[n].u_pc.req_valid && g_dut.dut.g_tile[n].u_pc.req_ready) begin
        case (g_dut.dut.g_tile[n].u_pc.req_msg.hdr.typ)
          M_READ:    c_read[n]++;
          M_RDEX:    c_rdex[n]++;
          M_UPGRADE: c_upg[n]++;
          M_REPLACE: begin
            c_repl[n]++;
            if (g_dut.dut.g_tile[n].u_pc.req_msg.hdr.has_data) c_repld[n]++;
          end
          default: ;
        endcase
      end
      if (g_dut.dut.g_tile[n].u_pc.rsp_valid && g_dut.dut.g_tile[n].u_pc.rsp_ready) c_ackd[n]++;
      if (g_dut.dut.g_tile[n].u_llc.fwd_valid && g_dut.dut.g_tile[n].u_llc.fwd_ready) begin
        if (g_dut.dut.g_tile[n].u_llc.fwd_msg.hdr.typ == M_SHD_INT) c_shd[n]++;
        else c_exc[n]++;
        if (int'(g_dut.dut.g_tile[n].u_llc.fsm_q) == 5) c_rec[n]++;  // recall for eviction
      end
      if (g_dut.dut.g_tile[n].u_llc.rsp_valid && g_dut.dut.g_tile[n].u_llc.rsp_ready) begin
        case (g_dut.dut.g_tile[n].u_llc.rsp_msg.hdr.typ)
          M_REP_SHD:    c_rs[n]++;
          M_REP_EXC:    c_rx[n]++;
          M_ACK_CHANGE: c_ac[n]++;
          default: ;
        endcase
      end
    end
  end

  // state dump when the watchdog fires
  event dump_ev;
  for (genvar n = 0; n < NCORES; n++) begin : g_dump
    always @(dump_ev)
      $display("tile %0d: pc fsm %0d addr %h fwd_v %0b rin_v %0b | llc fsm %0d addr %h src %0d typ %0d",
               n, int'(g_dut.dut.g_tile[n].u_pc.fsm_q), g_dut.dut.g_tile[n].u_pc.la_q,
               g_dut.dut.g_tile[n].u_pc.fwd_valid, g_dut.dut.g_tile[n].u_pc.rin_valid,
               int'(g_dut.dut.g_tile[n].u_llc.fsm_q), g_dut.dut.g_tile[n].u_llc.rq_q.hdr.addr,
               g_dut.dut.g_tile[n].u_llc.rq_q.hdr.src, int'(g_dut.dut.g_tile[n].u_llc.rq_q.hdr.typ));
  end
  for (genvar n = 0; n < NCORES; n++) begin : g_dump2
    always @(dump_ev)
      $display("tile %0d: pc req_v %0b rsp_v %0b retry %0b wb %0b | llc fwd_v %0b rsp_v %0b rin_v %0b fwd dst %0d | rsp rx v %0b dst_llc %0b typ %0d",
               n, g_dut.dut.g_tile[n].u_pc.req_valid, g_dut.dut.g_tile[n].u_pc.rsp_valid,
               g_dut.dut.g_tile[n].u_pc.upg_retry_q, g_dut.dut.g_tile[n].u_pc.wb_valid_q,
               g_dut.dut.g_tile[n].u_llc.fwd_valid, g_dut.dut.g_tile[n].u_llc.rsp_valid,
               g_dut.dut.g_tile[n].u_llc.rin_valid, g_dut.dut.g_tile[n].u_llc.fwd_msg.hdr.dst,
               g_dut.dut.g_tile[n].u_ni.rsp_rx_valid, g_dut.dut.g_tile[n].u_ni.rsp_rx_msg.hdr.dst_llc,
               int'(g_dut.dut.g_tile[n].u_ni.rsp_rx_msg.hdr.typ));
  end

  // ---------------- core models ----------------
  int done_cores = 0;

  task automatic do_op(int c, core_op_e op, int wi, word_t wd, logic [7:0] be,
                       output word_t res, output logic spec, output logic ok, output int lat);
    int t0;
    @(negedge clk);
    core_req_valid[c] = 1'b1;
    core_req_op[c]    = op;
    core_req_addr[c]  = word_addr(wi);
    core_req_wdata[c] = wd;
    core_req_wstrb[c] = be;
    while (!core_req_ready[c]) @(negedge clk);
    @(negedge clk);
    t0 = cyc;
    core_req_valid[c] = 1'b0;
    while (!core_resp_valid[c]) @(negedge clk);
    lat  = cyc - t0;
    res  = core_resp_rdata[c];
    spec = core_resp_spec[c];
    ok   = 1'b1;
    if (spec) begin
      do @(negedge clk); while (!core_chk_valid[c]);
      ok = core_chk_ok[c];
      if (!ok) res = core_chk_data[c];
    end
  endtask

  for (genvar c = 0; c < NCORES; c++) begin : g_core
    initial begin
      word_t r, wd, exp;
      logic  sp, ok;
      int    lat, wi, p, k;
      logic [7:0] be;
      core_req_valid[c] = 1'b0;
      core_req_op[c] = OP_LOAD; core_req_addr[c] = '0;
      core_req_wdata[c] = '0;   core_req_wstrb[c] = '0;
      wait (rst_n && init_done);
      for (p = 0; p < int'(PHASES); p++) begin
        wait (phase_go == p + 1);
        for (k = 0; k < int'(OPS); k++) begin
          wi = int'($urandom_range(0, NWORD-1));
          if (owner[wi] == c && $urandom_range(0, 1) == 1) begin
            wd = {$urandom, $urandom};
            be = ($urandom_range(0, 3) == 0) ? 8'(($urandom_range(1, 255))) : 8'hFF;
            do_op(c, OP_STORE, wi, wd, be, r, sp, ok, lat);
            for (int b = 0; b < 8; b++) if (be[b]) gold[wi][b*8 +: 8] = wd[b*8 +: 8];
          end else if (owner[wi] == c || owner[wi] == -1) begin
            exp = gold[wi];
            do_op(c, OP_LOAD, wi, '0, '0, r, sp, ok, lat);
            checks++;
            if (r !== exp) begin
              failures++;
              $display("FAIL core %0d phase %0d word %0d: got %h exp %h (spec %0b ok %0b)",
                       c, p, wi, r, exp, sp, ok);
            end
            if (sp) begin
              n_spec++;
              if (ok) n_spec_ok++; else n_spec_bad++;
            end else if (lat == 3) begin
              n_hit++;
            end
            if (lat < 3) hit_lat_bad++;
          end
        end
        arrived++;
        wait (arrived == NCORES * (2 * p + 1));
        do_op(c, OP_SYNC, 0, '0, '0, r, sp, ok, lat);
        n_sync++;
        arrived++;
      end
      done_cores++;
    end
  end

  initial begin
    n_spec = 0; n_spec_ok = 0; n_spec_bad = 0; n_sync = 0; n_hit = 0; hit_lat_bad = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (init_done);
    for (int p = 0; p < int'(PHASES); p++) begin
      new_phase(p);
      phase_go = p + 1;
      wait (arrived == 2 * NCORES * (p + 1));
    end
    wait (done_cores == NCORES);
    repeat (50) @(posedge clk);
    n_read=0; n_rdex=0; n_upg=0; n_repl=0; n_repl_data=0; n_shdint=0; n_excint=0;
    n_ackdata=0; n_repshd=0; n_repexc=0; n_ackchg=0; n_recall=0;
    for (int n = 0; n < NCORES; n++) begin
      n_read += c_read[n]; n_rdex += c_rdex[n]; n_upg += c_upg[n]; n_repl += c_repl[n];
      n_repl_data += c_repld[n]; n_shdint += c_shd[n]; n_excint += c_exc[n];
      n_ackdata += c_ackd[n]; n_repshd += c_rs[n]; n_repexc += c_rx[n]; n_ackchg += c_ac[n];
      n_recall += c_rec[n];
    end
    $display("cycles %0d  loads checked %0d  hits %0d", cyc, checks, n_hit);
    $display("Read %0d RdEx %0d Upgrade %0d Replace %0d (with data %0d)",
             n_read, n_rdex, n_upg, n_repl, n_repl_data);
    $display("ShdInt %0d ExcInt %0d (LLC recalls %0d) AckData %0d RepShd %0d RepExc %0d AckChange %0d",
             n_shdint, n_excint, n_recall, n_ackdata, n_repshd, n_repexc, n_ackchg);
    $display("sync %0d  SUS loads %0d  committed %0d  squashed %0d  mem reads %0d writes %0d",
             n_sync, n_spec, n_spec_ok, n_spec_bad, u_mem.reads, u_mem.writes);
    // every mechanism must have happened
    checks++; if (n_hit == 0)        begin failures++; $display("FAIL no 3-cycle hit"); end
    checks++; if (hit_lat_bad != 0)  begin failures++; $display("FAIL response under 3 cycles"); end
    checks++; if (n_spec_ok == 0)    begin failures++; $display("FAIL no committed SUS load"); end
    checks++; if (n_spec_bad == 0)   begin failures++; $display("FAIL no squashed SUS load"); end
    checks++; if (n_upg == 0)        begin failures++; $display("FAIL no Upgrade"); end
    checks++; if (n_shdint == 0)     begin failures++; $display("FAIL no ShdIntervention"); end
    checks++; if (n_excint == 0)     begin failures++; $display("FAIL no ExcIntervention"); end
    checks++; if (n_repl_data == 0)  begin failures++; $display("FAIL no Replace of a MOD block"); end
    checks++; if (n_repshd == 0)     begin failures++; $display("FAIL no RepShd"); end
    checks++; if (n_repexc == 0)     begin failures++; $display("FAIL no RepExc"); end
    checks++; if (n_recall == 0)     begin failures++; $display("FAIL no LLC eviction recall"); end
    checks++; if (u_mem.writes == 0) begin failures++; $display("FAIL no LLC write-back"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL watchdog at cycle %0d", cyc);
    -> dump_ev;
    #1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
