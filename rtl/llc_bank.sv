// llc_bank: one bank of the shared last-level cache (1 MB, 4-way, 64-byte
// blocks, 10-cycle access; 16 banks make the 16 MB S-NUCA LLC) with the DLS
// controller. There is no sharer directory: each tag holds only an owner
// field, the id of the single core that may hold an EXC/MOD copy ("-1",
// owner.valid = 0, when there is none). Block states are INV, EXC (LLC data
// is newest) and MOD (the owner may hold newer data).
//   Read,    no owner      -> RepExc from LLC data, owner := requester
//   Read,    owner, EXC    -> RepShd from LLC data, owner unchanged
//   Read,    owner, MOD    -> ShdIntervention to owner, wait AckData,
//                             state EXC, RepShd with the owner's data
//   RdEx,    no owner      -> RepExc, owner := requester, state MOD
//   RdEx,    owner         -> ExcIntervention to owner, wait AckData,
//                             RepExc with the owner's data,
//                             owner := requester, state MOD
//   Upgrade, from owner    -> state MOD, AckChange
//   Replace, from owner    -> owner := -1, state EXC (data kept if sent), AckChange
//   miss                   -> refill from memory, state EXC, then as above
// No Invalidation is ever sent; SHD copies in other caches are not tracked.
// The bank serves one request at a time. A request is accepted on req_*;
// its reply is valid on rsp_* LAT cycles after the request handshake when it
// hits and needs no intervention (LAT >= 2).
// Own choices: after an RdEx the block is left MOD, not EXC, because the
// requester performs its store on arrival of the RepExc (with an Upgrade
// still to follow, two writers can take a block from each other forever);
// an Upgrade or Replace from a core that is no longer the owner
// (it lost the block to an intervention while its message was in flight) is
// served as a RdEx or answered with a plain AckChange; on an RdEx the data
// returned is always the owner's AckData copy; a victim with an owner is
// recalled with an ExcIntervention before eviction; a dirty bit (against
// memory) decides write-back; victims are chosen round-robin after invalid
// ways; the tag state is cleared by a sweep of SETS cycles after reset.
module llc_bank
  import dls_pkg::*;
#(
  parameter int unsigned MY_ID = 0,
  parameter int unsigned SETS  = 4096,
  parameter int unsigned WAYS  = 4,
  parameter int unsigned LAT   = 10
) (
  input  logic   clk,
  input  logic   rst_n,
  output logic   init_done,
  // network side
  input  logic   req_valid,  output logic req_ready,  input  msg_t req_msg,
  output logic   fwd_valid,  input  logic fwd_ready,  output msg_t fwd_msg,
  output logic   rsp_valid,  input  logic rsp_ready,  output msg_t rsp_msg,
  input  logic   rin_valid,  output logic rin_ready,  input  msg_t rin_msg,
  // memory side (one block per request)
  output logic   mem_req_valid,
  input  logic   mem_req_ready,
  output logic   mem_req_we,
  output laddr_t mem_req_addr,
  output line_t  mem_req_wdata,
  input  logic   mem_rsp_valid,
  input  line_t  mem_rsp_data
);
  localparam int unsigned IDX_W = $clog2(SETS);
  localparam int unsigned WAY_W = $clog2(WAYS);
  localparam int unsigned TAG_W = LADDR_W - ID_W - IDX_W;
  localparam int unsigned LAT_W = $clog2(LAT+1);

  typedef logic [IDX_W-1:0] idx_t;
  typedef logic [TAG_W-1:0] tag_t;
  typedef logic [WAY_W-1:0] way_t;

  typedef enum logic [3:0] {
    L_INIT, L_IDLE, L_ACC, L_DEC, L_WACK, L_WEVK, L_MEMW, L_MEMR, L_MEMWAIT
  } fsm_e;

  llc_state_e st_q    [SETS][WAYS];
  owner_t     own_q   [SETS][WAYS];
  logic       dirty_q [SETS][WAYS];
  tag_t       tag_q   [SETS][WAYS];
  line_t      data_q  [SETS*WAYS];

  fsm_e             fsm_q;
  msg_t             rq_q;        // request being served
  way_t             way_q;
  way_t             vic_q;
  logic [LAT_W-1:0] cnt_q;
  idx_t             init_q;

  function automatic idx_t idx_of(laddr_t a); return a[ID_W +: IDX_W]; endfunction
  function automatic tag_t tag_of(laddr_t a); return a[LADDR_W-1 -: TAG_W]; endfunction

  function automatic msg_t mk(msg_type_e t, id_t dst, logic to_llc, laddr_t a, logic hd, line_t d);
    msg_t m;
    m.hdr.typ = t; m.hdr.src = id_t'(MY_ID); m.hdr.dst = dst; m.hdr.dst_llc = to_llc;
    m.hdr.has_data = hd; m.hdr.addr = a; m.data = d;
    return m;
  endfunction

  idx_t  ix;
  assign ix = idx_of(rq_q.hdr.addr);

  logic  hit, has_inv;
  way_t  hit_way, inv_way;
  always_comb begin
    hit = 1'b0; hit_way = '0; has_inv = 1'b0; inv_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (!hit && st_q[ix][w] != LLC_INV && tag_q[ix][w] == tag_of(rq_q.hdr.addr)) begin
        hit = 1'b1; hit_way = way_t'(w);
      end
      if (!has_inv && st_q[ix][w] == LLC_INV) begin
        has_inv = 1'b1; inv_way = way_t'(w);
      end
    end
  end

  owner_t     h_own;
  llc_state_e h_st;
  line_t      h_data;
  laddr_t     v_addr;
  assign h_own  = own_q[ix][hit_way];
  assign h_st   = st_q[ix][hit_way];
  assign h_data = data_q[int'(ix)*WAYS + int'(hit_way)];
  assign v_addr = {tag_q[ix][way_q], idx_t'(ix), id_t'(MY_ID)};

  logic out_free;
  assign out_free  = !fwd_valid && !rsp_valid;
  assign init_done = (fsm_q != L_INIT);
  assign req_ready = (fsm_q == L_IDLE);
  assign rin_ready = (fsm_q == L_WACK) || (fsm_q == L_WEVK);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fsm_q <= L_INIT; init_q <= '0; rq_q <= '0; way_q <= '0; vic_q <= '0; cnt_q <= '0;
      fwd_valid <= 1'b0; fwd_msg <= '0; rsp_valid <= 1'b0; rsp_msg <= '0;
      mem_req_valid <= 1'b0; mem_req_we <= 1'b0; mem_req_addr <= '0; mem_req_wdata <= '0;
    end else begin
      if (fwd_valid && fwd_ready) fwd_valid <= 1'b0;
      if (rsp_valid && rsp_ready) rsp_valid <= 1'b0;
      if (mem_req_valid && mem_req_ready) mem_req_valid <= 1'b0;

      unique case (fsm_q)
        L_INIT: begin
          for (int w = 0; w < WAYS; w++) begin
            st_q[init_q][w]    <= LLC_INV;
            own_q[init_q][w]   <= '0;
            dirty_q[init_q][w] <= 1'b0;
            tag_q[init_q][w]   <= '0;
          end
          init_q <= init_q + 1'b1;
          if (init_q == idx_t'(SETS-1)) fsm_q <= L_IDLE;
        end

        L_IDLE: if (req_valid) begin
          rq_q  <= req_msg;
          cnt_q <= '0;
          fsm_q <= L_ACC;
        end

        // tag and data array access time
        L_ACC: begin
          if (cnt_q == LAT_W'(LAT-2)) fsm_q <= L_DEC;
          else cnt_q <= cnt_q + 1'b1;
        end

        L_DEC: if (out_free) begin
          if (hit) begin
            way_q <= hit_way;
            fsm_q <= L_IDLE;
            unique case (rq_q.hdr.typ)
              M_READ: begin
                if (!h_own.valid || h_own.id == rq_q.hdr.src) begin
                  own_q[ix][hit_way] <= '{valid: 1'b1, id: rq_q.hdr.src};
                  rsp_valid <= 1'b1;
                  rsp_msg   <= mk(M_REP_EXC, rq_q.hdr.src, 1'b0, rq_q.hdr.addr, 1'b1, h_data);
                end else if (h_st == LLC_EXC) begin
                  rsp_valid <= 1'b1;
                  rsp_msg   <= mk(M_REP_SHD, rq_q.hdr.src, 1'b0, rq_q.hdr.addr, 1'b1, h_data);
                end else begin
                  fwd_valid <= 1'b1;
                  fwd_msg   <= mk(M_SHD_INT, h_own.id, 1'b0, rq_q.hdr.addr, 1'b0, '0);
                  fsm_q     <= L_WACK;
                end
              end
              M_RDEX, M_UPGRADE: begin
                if (rq_q.hdr.typ == M_UPGRADE && h_own.valid && h_own.id == rq_q.hdr.src) begin
                  st_q[ix][hit_way] <= LLC_MOD;
                  rsp_valid <= 1'b1;
                  rsp_msg   <= mk(M_ACK_CHANGE, rq_q.hdr.src, 1'b0, rq_q.hdr.addr, 1'b0, '0);
                end else if (!h_own.valid || h_own.id == rq_q.hdr.src) begin
                  own_q[ix][hit_way] <= '{valid: 1'b1, id: rq_q.hdr.src};
                  st_q[ix][hit_way]  <= LLC_MOD;   // the requester writes at once
                  rsp_valid <= 1'b1;
                  rsp_msg   <= mk(M_REP_EXC, rq_q.hdr.src, 1'b0, rq_q.hdr.addr, 1'b1, h_data);
                end else begin
                  fwd_valid <= 1'b1;
                  fwd_msg   <= mk(M_EXC_INT, h_own.id, 1'b0, rq_q.hdr.addr, 1'b0, '0);
                  fsm_q     <= L_WACK;
                end
              end
              M_REPLACE: begin
                if (h_own.valid && h_own.id == rq_q.hdr.src) begin
                  own_q[ix][hit_way] <= '0;
                  st_q[ix][hit_way]  <= LLC_EXC;
                  if (rq_q.hdr.has_data) begin
                    data_q[int'(ix)*WAYS + int'(hit_way)] <= rq_q.data;
                    dirty_q[ix][hit_way] <= 1'b1;
                  end
                end
                rsp_valid <= 1'b1;
                rsp_msg   <= mk(M_ACK_CHANGE, rq_q.hdr.src, 1'b0, rq_q.hdr.addr, 1'b0, '0);
              end
              default: ;
            endcase
          end else if (rq_q.hdr.typ == M_REPLACE) begin
            rsp_valid <= 1'b1;
            rsp_msg   <= mk(M_ACK_CHANGE, rq_q.hdr.src, 1'b0, rq_q.hdr.addr, 1'b0, '0);
            fsm_q     <= L_IDLE;
          end else begin
            // LLC miss: free a way, then refill from memory
            way_t v;
            v = has_inv ? inv_way : vic_q;
            way_q <= v;
            if (!has_inv) vic_q <= vic_q + 1'b1;
            if (st_q[ix][v] != LLC_INV && own_q[ix][v].valid) begin
              fwd_valid <= 1'b1;
              fwd_msg   <= mk(M_EXC_INT, own_q[ix][v].id, 1'b0,
                              {tag_q[ix][v], idx_t'(ix), id_t'(MY_ID)}, 1'b0, '0);
              fsm_q     <= L_WEVK;
            end else if (st_q[ix][v] != LLC_INV && dirty_q[ix][v]) begin
              fsm_q <= L_MEMW;
            end else begin
              fsm_q <= L_MEMR;
            end
          end
        end

        L_WACK: if (rin_valid && rin_msg.hdr.typ == M_ACK_DATA) begin
          data_q[int'(ix)*WAYS + int'(way_q)] <= rin_msg.data;
          if (st_q[ix][way_q] == LLC_MOD) dirty_q[ix][way_q] <= 1'b1;
          rsp_valid <= 1'b1;
          if (rq_q.hdr.typ == M_READ) begin
            st_q[ix][way_q] <= LLC_EXC;
            rsp_msg <= mk(M_REP_SHD, rq_q.hdr.src, 1'b0, rq_q.hdr.addr, 1'b1, rin_msg.data);
          end else begin
            st_q[ix][way_q] <= LLC_MOD;   // the requester writes at once
            rsp_msg <= mk(M_REP_EXC, rq_q.hdr.src, 1'b0, rq_q.hdr.addr, 1'b1, rin_msg.data);
            own_q[ix][way_q] <= '{valid: 1'b1, id: rq_q.hdr.src};
          end
          fsm_q <= L_IDLE;
        end

        L_WEVK: if (rin_valid && rin_msg.hdr.typ == M_ACK_DATA) begin
          data_q[int'(ix)*WAYS + int'(way_q)] <= rin_msg.data;
          own_q[ix][way_q] <= '0;
          if (st_q[ix][way_q] == LLC_MOD || dirty_q[ix][way_q]) begin
            dirty_q[ix][way_q] <= 1'b1;
            fsm_q <= L_MEMW;
          end else begin
            fsm_q <= L_MEMR;
          end
        end

        L_MEMW: if (!mem_req_valid) begin
          mem_req_valid <= 1'b1;
          mem_req_we    <= 1'b1;
          mem_req_addr  <= v_addr;
          mem_req_wdata <= data_q[int'(ix)*WAYS + int'(way_q)];
          st_q[ix][way_q] <= LLC_INV;
          fsm_q <= L_MEMR;
        end

        L_MEMR: if (!mem_req_valid) begin
          st_q[ix][way_q] <= LLC_INV;
          mem_req_valid <= 1'b1;
          mem_req_we    <= 1'b0;
          mem_req_addr  <= rq_q.hdr.addr;
          fsm_q <= L_MEMWAIT;
        end

        L_MEMWAIT: if (mem_rsp_valid) begin
          data_q[int'(ix)*WAYS + int'(way_q)] <= mem_rsp_data;
          tag_q[ix][way_q]   <= tag_of(rq_q.hdr.addr);
          st_q[ix][way_q]    <= LLC_EXC;
          own_q[ix][way_q]   <= '0;
          dirty_q[ix][way_q] <= 1'b0;
          fsm_q <= L_DEC;
        end

        default: fsm_q <= L_IDLE;
      endcase
    end
  end

  // Requests reach the bank that is their home.
  a_home: assert property (@(posedge clk) disable iff (!rst_n)
    (req_valid && req_ready) |-> home_bank(req_msg.hdr.addr) == id_t'(MY_ID));

endmodule
