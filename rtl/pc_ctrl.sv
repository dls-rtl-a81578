// pc_ctrl: private L1 data cache of one core with the DLS coherence
// controller (64 KB, 4-way, 64-byte blocks, 3-cycle hit latency).
//
// Block states: INV, SHD, SUS, EXC, MOD. Loads hit in SHD/EXC/MOD, stores
// hit in MOD; a store to an EXC block first sends Upgrade and writes when the
// LLC answers AckChange; a store miss sends RdEx and writes as soon as the
// RepExc arrives. There are no invalidations: a SHD copy may coexist
// with another core's EXC/MOD copy. Instead, a synchronization (OP_SYNC)
// flash-converts every SHD block of this cache to SUS. A load that hits a SUS
// block returns the block's current word at once, flagged speculative
// (core_resp_spec), and sends a Read to the LLC; when the newest block
// arrives it is compared with the SUS copy and core_chk_* tells the core
// whether the speculation was right (commit) or stale (re-execute with
// core_chk_data). Either way the block is refilled and leaves SUS (SHD, or
// EXC when the LLC had no owner and answered RepExc). A store to a SUS block
// is a normal miss (RdEx). SHD/SUS victims are dropped silently; EXC/MOD
// victims send Replace (with data if MOD) and are kept in a one-entry
// write-back buffer until AckChange. ShdIntervention turns MOD into EXC,
// ExcIntervention turns EXC/MOD into SHD; both are answered with AckData.
//
// Core interface: one request at a time (valid/ready); core_resp_valid
// pulses HIT_LAT cycles after acceptance on a hit, later on a miss. The
// cache is blocking: a new core request is taken only when the previous
// one and its speculative check are complete.
// Network side: REQ out (Read/RdEx/Upgrade/Replace), RESP out (AckData),
// FWD in (interventions), RESP in (RepShd/RepExc/AckChange).
//
// The states, transitions and messages follow the paper. Own choices: the
// blocking single-miss organisation, round-robin victim choice, the
// write-back buffer, deferring an intervention for the block of a pending
// Read/RdEx until the reply arrives, falling back to RdEx when an
// intervention to the same block overtook an Upgrade's AckChange, and
// writing at once on the RepExc of an RdEx (the LLC marks that block MOD),
// which keeps two writers from taking the block from each other forever.
module pc_ctrl
  import dls_pkg::*;
#(
  parameter int unsigned MY_ID   = 0,
  parameter int unsigned SETS    = 256,
  parameter int unsigned WAYS    = 4,
  parameter int unsigned HIT_LAT = 3
) (
  input  logic      clk,
  input  logic      rst_n,
  // core side
  input  logic      core_req_valid,
  output logic      core_req_ready,
  input  core_op_e  core_req_op,
  input  logic [ADDR_W-1:0] core_req_addr,
  input  word_t     core_req_wdata,
  input  logic [7:0] core_req_wstrb,
  output logic      core_resp_valid,
  output word_t     core_resp_rdata,
  output logic      core_resp_spec,
  output logic      core_chk_valid,
  output logic      core_chk_ok,
  output word_t     core_chk_data,
  // network side
  output logic      req_valid,  input  logic req_ready,  output msg_t req_msg,
  output logic      rsp_valid,  input  logic rsp_ready,  output msg_t rsp_msg,
  input  logic      fwd_valid,  output logic fwd_ready,  input  msg_t fwd_msg,
  input  logic      rin_valid,  output logic rin_ready,  input  msg_t rin_msg
);
  localparam int unsigned IDX_W = $clog2(SETS);
  localparam int unsigned WAY_W = $clog2(WAYS);
  localparam int unsigned TAG_W = LADDR_W - IDX_W;
  localparam int unsigned LAT_W = $clog2(HIT_LAT+1);

  typedef logic [IDX_W-1:0] idx_t;
  typedef logic [TAG_W-1:0] tag_t;
  typedef logic [WAY_W-1:0] way_t;

  typedef enum logic [2:0] {
    S_IDLE, S_LOOK, S_WREPL, S_WFILL, S_WSPEC, S_WUPG
  } fsm_e;

  // ---------------- arrays ----------------
  pc_state_e st_q   [SETS][WAYS];
  tag_t      tag_q  [SETS][WAYS];
  line_t     data_q [SETS*WAYS];

  // ---------------- request registers ----------------
  fsm_e             fsm_q;
  core_op_e         op_q;
  laddr_t           la_q;
  logic [WOFF_W-1:0] woff_q;
  word_t            wdata_q;
  logic [7:0]       wstrb_q;
  way_t             way_q;
  logic [LAT_W-1:0] cnt_q;
  way_t             vic_q;
  logic             upg_retry_q;
  // write-back buffer
  logic             wb_valid_q;
  laddr_t           wb_addr_q;
  line_t            wb_data_q;

  function automatic idx_t idx_of(laddr_t a); return a[IDX_W-1:0]; endfunction
  function automatic tag_t tag_of(laddr_t a); return a[LADDR_W-1:IDX_W]; endfunction

  function automatic line_t merge(line_t l, logic [WOFF_W-1:0] w, word_t d, logic [7:0] be);
    line_t r;
    r = l;
    for (int b = 0; b < 8; b++)
      if (be[b]) r[int'(w)*WORD_W + b*8 +: 8] = d[b*8 +: 8];
    return r;
  endfunction

  function automatic msg_t mk_req(msg_type_e t, laddr_t a, logic hd, line_t d);
    msg_t m;
    m.hdr.typ      = t;
    m.hdr.src      = id_t'(MY_ID);
    m.hdr.dst      = home_bank(a);
    m.hdr.dst_llc  = 1'b1;
    m.hdr.has_data = hd;
    m.hdr.addr     = a;
    m.data         = d;
    return m;
  endfunction

  // ---------------- lookup of the core request ----------------
  logic      hit;
  way_t      hit_way;
  pc_state_e hit_st;
  logic      has_inv;
  way_t      inv_way;

  always_comb begin
    hit = 1'b0; hit_way = '0; hit_st = PC_INV; has_inv = 1'b0; inv_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (!hit && st_q[idx_of(la_q)][w] != PC_INV && tag_q[idx_of(la_q)][w] == tag_of(la_q)) begin
        hit = 1'b1; hit_way = way_t'(w); hit_st = st_q[idx_of(la_q)][w];
      end
      if (!has_inv && st_q[idx_of(la_q)][w] == PC_INV) begin
        has_inv = 1'b1; inv_way = way_t'(w);
      end
    end
  end

  // ---------------- lookup of an intervention ----------------
  logic      f_hit;
  way_t      f_way;
  pc_state_e f_st;
  always_comb begin
    f_hit = 1'b0; f_way = '0; f_st = PC_INV;
    for (int w = 0; w < WAYS; w++)
      if (!f_hit && st_q[idx_of(fwd_msg.hdr.addr)][w] != PC_INV
          && tag_q[idx_of(fwd_msg.hdr.addr)][w] == tag_of(fwd_msg.hdr.addr)) begin
        f_hit = 1'b1; f_way = way_t'(w); f_st = st_q[idx_of(fwd_msg.hdr.addr)][w];
      end
  end

  logic waiting, fwd_defer, take_fwd, take_rin;
  assign waiting   = (fsm_q == S_IDLE) || (fsm_q == S_WREPL) || (fsm_q == S_WFILL)
                  || (fsm_q == S_WSPEC) || (fsm_q == S_WUPG);
  assign fwd_defer = ((fsm_q == S_WFILL) || (fsm_q == S_WSPEC)) && fwd_msg.hdr.addr == la_q;
  assign take_rin  = rin_valid && (fsm_q != S_IDLE) && (fsm_q != S_LOOK) && !req_valid;
  assign take_fwd  = fwd_valid && waiting && !fwd_defer && !take_rin && !rsp_valid;
  assign rin_ready = take_rin;
  assign fwd_ready = take_fwd;
  assign core_req_ready = (fsm_q == S_IDLE) && !fwd_valid && !req_valid;

  line_t cur_line;
  assign cur_line = data_q[int'(idx_of(la_q))*WAYS + int'(way_q)];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++) begin
          st_q[s][w]  <= PC_INV;
          tag_q[s][w] <= '0;
        end
      fsm_q <= S_IDLE;
      op_q <= OP_LOAD; la_q <= '0; woff_q <= '0; wdata_q <= '0; wstrb_q <= '0;
      way_q <= '0; cnt_q <= '0; vic_q <= '0; upg_retry_q <= 1'b0;
      wb_valid_q <= 1'b0; wb_addr_q <= '0; wb_data_q <= '0;
      req_valid <= 1'b0; req_msg <= '0;
      rsp_valid <= 1'b0; rsp_msg <= '0;
      core_resp_valid <= 1'b0; core_resp_rdata <= '0; core_resp_spec <= 1'b0;
      core_chk_valid <= 1'b0; core_chk_ok <= 1'b0; core_chk_data <= '0;
    end else begin
      core_resp_valid <= 1'b0;
      core_resp_spec  <= 1'b0;
      core_chk_valid  <= 1'b0;
      if (req_valid && req_ready) req_valid <= 1'b0;
      if (rsp_valid && rsp_ready) rsp_valid <= 1'b0;

      // ---------- interventions (ShdIntervention / ExcIntervention) ----------
      if (take_fwd) begin
        rsp_valid            <= 1'b1;
        rsp_msg.hdr.typ      <= M_ACK_DATA;
        rsp_msg.hdr.src      <= id_t'(MY_ID);
        rsp_msg.hdr.dst      <= fwd_msg.hdr.src;
        rsp_msg.hdr.dst_llc  <= 1'b1;
        rsp_msg.hdr.has_data <= 1'b1;
        rsp_msg.hdr.addr     <= fwd_msg.hdr.addr;
        if (f_hit) begin
          rsp_msg.data <= data_q[int'(idx_of(fwd_msg.hdr.addr))*WAYS + int'(f_way)];
          if (fwd_msg.hdr.typ == M_EXC_INT)
            st_q[idx_of(fwd_msg.hdr.addr)][f_way] <= PC_SHD;
          else if (f_st == PC_MOD)
            st_q[idx_of(fwd_msg.hdr.addr)][f_way] <= PC_EXC;
        end else if (wb_valid_q && wb_addr_q == fwd_msg.hdr.addr) begin
          rsp_msg.data <= wb_data_q;
        end else begin
          rsp_msg.data <= '0;
        end
        if (fsm_q == S_WUPG && fwd_msg.hdr.addr == la_q) upg_retry_q <= 1'b1;
      end

      unique case (fsm_q)
        S_IDLE: begin
          if (core_req_valid && core_req_ready) begin
            op_q    <= core_req_op;
            la_q    <= core_req_addr[ADDR_W-1:OFF_W];
            woff_q  <= core_req_addr[OFF_W-1:WOFF_W];
            wdata_q <= core_req_wdata;
            wstrb_q <= core_req_wstrb;
            cnt_q   <= '0;
            fsm_q   <= S_LOOK;
          end
        end

        S_LOOK: begin
          if (cnt_q != LAT_W'(HIT_LAT-1)) begin
            cnt_q <= cnt_q + 1'b1;
          end else if (op_q == OP_SYNC) begin
            // self-suspicion: every SHD block becomes SUS
            for (int s = 0; s < SETS; s++)
              for (int w = 0; w < WAYS; w++)
                if (st_q[s][w] == PC_SHD) st_q[s][w] <= PC_SUS;
            core_resp_valid <= 1'b1;
            fsm_q <= S_IDLE;
          end else if (hit && op_q == OP_LOAD && hit_st != PC_SUS) begin
            core_resp_valid <= 1'b1;
            core_resp_rdata <= get_word(data_q[int'(idx_of(la_q))*WAYS + int'(hit_way)], woff_q);
            fsm_q <= S_IDLE;
          end else if (hit && op_q == OP_LOAD) begin
            // SUS hit: speculative data now, Read to the LLC in parallel
            core_resp_valid <= 1'b1;
            core_resp_spec  <= 1'b1;
            core_resp_rdata <= get_word(data_q[int'(idx_of(la_q))*WAYS + int'(hit_way)], woff_q);
            way_q     <= hit_way;
            req_valid <= 1'b1;
            req_msg   <= mk_req(M_READ, la_q, 1'b0, '0);
            fsm_q     <= S_WSPEC;
          end else if (hit && hit_st == PC_MOD) begin
            data_q[int'(idx_of(la_q))*WAYS + int'(hit_way)] <=
              merge(data_q[int'(idx_of(la_q))*WAYS + int'(hit_way)], woff_q, wdata_q, wstrb_q);
            core_resp_valid <= 1'b1;
            fsm_q <= S_IDLE;
          end else if (hit && hit_st == PC_EXC) begin
            way_q       <= hit_way;
            upg_retry_q <= 1'b0;
            req_valid   <= 1'b1;
            req_msg     <= mk_req(M_UPGRADE, la_q, 1'b0, '0);
            fsm_q       <= S_WUPG;
          end else if (hit) begin
            // store to SHD/SUS: RdEx into the same way
            way_q     <= hit_way;
            req_valid <= 1'b1;
            req_msg   <= mk_req(M_RDEX, la_q, 1'b0, '0);
            fsm_q     <= S_WFILL;
          end else begin
            // miss: pick a victim
            way_t v;
            v = has_inv ? inv_way : vic_q;
            way_q <= v;
            if (!has_inv) vic_q <= vic_q + 1'b1;
            if (st_q[idx_of(la_q)][v] == PC_EXC || st_q[idx_of(la_q)][v] == PC_MOD) begin
              wb_valid_q <= 1'b1;
              wb_addr_q  <= {tag_q[idx_of(la_q)][v], idx_of(la_q)};
              wb_data_q  <= data_q[int'(idx_of(la_q))*WAYS + int'(v)];
              req_valid  <= 1'b1;
              req_msg    <= mk_req(M_REPLACE, {tag_q[idx_of(la_q)][v], idx_of(la_q)},
                                   st_q[idx_of(la_q)][v] == PC_MOD,
                                   data_q[int'(idx_of(la_q))*WAYS + int'(v)]);
              fsm_q      <= S_WREPL;
            end else begin
              req_valid <= 1'b1;
              req_msg   <= mk_req(op_q == OP_STORE ? M_RDEX : M_READ, la_q, 1'b0, '0);
              fsm_q     <= S_WFILL;
            end
            st_q[idx_of(la_q)][v] <= PC_INV;
          end
        end

        S_WREPL: begin
          if (take_rin && rin_msg.hdr.typ == M_ACK_CHANGE) begin
            wb_valid_q <= 1'b0;
            req_valid  <= 1'b1;
            req_msg    <= mk_req(op_q == OP_STORE ? M_RDEX : M_READ, la_q, 1'b0, '0);
            fsm_q      <= S_WFILL;
          end
        end

        S_WFILL: begin
          if (take_rin && (rin_msg.hdr.typ == M_REP_SHD || rin_msg.hdr.typ == M_REP_EXC)) begin
            data_q[int'(idx_of(la_q))*WAYS + int'(way_q)] <= rin_msg.data;
            tag_q[idx_of(la_q)][way_q] <= tag_of(la_q);
            st_q[idx_of(la_q)][way_q]  <= (rin_msg.hdr.typ == M_REP_EXC) ? PC_EXC : PC_SHD;
            if (op_q == OP_LOAD) begin
              core_resp_valid <= 1'b1;
              core_resp_rdata <= get_word(rin_msg.data, woff_q);
              fsm_q <= S_IDLE;
            end else if (rin_msg.hdr.typ == M_REP_EXC) begin
              // RdEx granted: the LLC already holds the block as MOD
              st_q[idx_of(la_q)][way_q] <= PC_MOD;
              data_q[int'(idx_of(la_q))*WAYS + int'(way_q)] <= merge(rin_msg.data, woff_q, wdata_q, wstrb_q);
              core_resp_valid <= 1'b1;
              fsm_q <= S_IDLE;
            end else begin
              req_valid <= 1'b1;
              req_msg   <= mk_req(M_RDEX, la_q, 1'b0, '0);
            end
          end
        end

        S_WSPEC: begin
          if (take_rin && (rin_msg.hdr.typ == M_REP_SHD || rin_msg.hdr.typ == M_REP_EXC)) begin
            core_chk_valid <= 1'b1;
            core_chk_ok    <= (rin_msg.data == cur_line);
            core_chk_data  <= get_word(rin_msg.data, woff_q);
            data_q[int'(idx_of(la_q))*WAYS + int'(way_q)] <= rin_msg.data;
            st_q[idx_of(la_q)][way_q] <= (rin_msg.hdr.typ == M_REP_EXC) ? PC_EXC : PC_SHD;
            fsm_q <= S_IDLE;
          end
        end

        S_WUPG: begin
          if (take_rin && rin_msg.hdr.typ == M_REP_EXC) begin
            // the LLC saw this Upgrade from a non-owner and served it as RdEx
            st_q[idx_of(la_q)][way_q] <= PC_MOD;
            data_q[int'(idx_of(la_q))*WAYS + int'(way_q)] <= merge(rin_msg.data, woff_q, wdata_q, wstrb_q);
            core_resp_valid <= 1'b1;
            fsm_q <= S_IDLE;
          end else if (take_rin && rin_msg.hdr.typ == M_ACK_CHANGE) begin
            if (upg_retry_q || st_q[idx_of(la_q)][way_q] != PC_EXC) begin
              // an intervention overtook the grant: fall back to RdEx
              upg_retry_q <= 1'b0;
              req_valid   <= 1'b1;
              req_msg     <= mk_req(M_RDEX, la_q, 1'b0, '0);
              fsm_q       <= S_WFILL;
            end else begin
              st_q[idx_of(la_q)][way_q] <= PC_MOD;
              data_q[int'(idx_of(la_q))*WAYS + int'(way_q)] <= merge(cur_line, woff_q, wdata_q, wstrb_q);
              core_resp_valid <= 1'b1;
              fsm_q <= S_IDLE;
            end
          end
        end

        default: fsm_q <= S_IDLE;
      endcase
    end
  end

  // Replies only arrive for an outstanding transaction.
  a_rin_expected: assert property (@(posedge clk) disable iff (!rst_n)
    rin_valid |-> fsm_q != S_IDLE);
  a_one_msg: assert property (@(posedge clk) disable iff (!rst_n)
    (req_valid && !req_ready) |=> req_valid);

endmodule
