// mesh_router: one router of the 2-D mesh network-on-chip.
// Five ports (0 local, 1 north, 2 east, 3 south, 4 west), 128-bit flits,
// wormhole switching with dimension-order (X then Y) routing and
// credit-based flow control. Two pipeline stages, as in the evaluated
// system: stage 1 writes the arriving flit into its input buffer and decodes
// the route from the head flit; stage 2 performs switch allocation
// (round-robin per output, held for the whole packet) and drives the
// registered output. A flit that arrives at cycle t therefore leaves at
// cycle t+2 when it meets no contention.
// Interface: in_valid/in_flit per input, in_credit returns one credit to the
// upstream sender for each flit that leaves an input buffer; out_valid/out_flit
// per output, out_credit receives credits from the downstream buffer.
// The 2-stage depth and 128-bit width follow the paper; the switching,
// routing, flow control and buffer depth are this design's choices.
module mesh_router
  import dls_pkg::*;
#(
  parameter int unsigned MY_X  = 0,
  parameter int unsigned MY_Y  = 0,
  parameter int unsigned DEPTH = 8    // flits per input buffer
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [4:0]  in_valid,
  input  flit_t       in_flit   [5],
  output logic [4:0]  in_credit,
  output logic [4:0]  out_valid,
  output flit_t       out_flit  [5],
  input  logic [4:0]  out_credit
);
  localparam int unsigned PTR_W = $clog2(DEPTH);
  localparam int unsigned CNT_W = $clog2(DEPTH+1);

  // ---------------- stage 1: input buffers ----------------
  flit_t             buf_q  [5][DEPTH];
  logic [PTR_W-1:0]  wr_q   [5];
  logic [PTR_W-1:0]  rd_q   [5];
  logic [CNT_W-1:0]  cnt_q  [5];
  logic [2:0]        route_q[5];   // output of the packet in flight
  logic [4:0]        pop;

  function automatic logic [2:0] xy_route(hdr_t h);
    int unsigned dx, dy;
    dx = int'(h.dst) % MESH_X;
    dy = int'(h.dst) / MESH_X;
    if (dx > MY_X)      return 3'd2;
    else if (dx < MY_X) return 3'd4;
    else if (dy < MY_Y) return 3'd1;
    else if (dy > MY_Y) return 3'd3;
    else                return 3'd0;
  endfunction

  flit_t      head_flit [5];
  logic [2:0] want      [5];
  logic [4:0] has_flit;

  always_comb begin
    for (int i = 0; i < 5; i++) begin
      head_flit[i] = buf_q[i][rd_q[i]];
      has_flit[i]  = (cnt_q[i] != '0);
      want[i]      = head_flit[i].head ? xy_route(hdr_t'(head_flit[i].payload[HDR_W-1:0]))
                                       : route_q[i];
    end
  end

  // ---------------- stage 2: switch allocation + output ----------------
  logic [4:0]        lock_q;
  logic [2:0]        owner_q [5];
  logic [2:0]        rr_q    [5];
  logic [CNT_W-1:0]  cred_q  [5];
  logic [4:0]        grant_v;
  logic [2:0]        grant_i [5];

  always_comb begin
    pop = '0;
    for (int o = 0; o < 5; o++) begin
      grant_v[o] = 1'b0;
      grant_i[o] = '0;
      if (cred_q[o] != '0) begin
        if (lock_q[o]) begin
          if (has_flit[owner_q[o]]) begin
            grant_v[o] = 1'b1;
            grant_i[o] = owner_q[o];
          end
        end else begin
          for (int k = 0; k < 5; k++) begin
            if (!grant_v[o] && has_flit[(int'(rr_q[o]) + k) % 5]
                && head_flit[(int'(rr_q[o]) + k) % 5].head
                && want[(int'(rr_q[o]) + k) % 5] == 3'(o)) begin
              grant_v[o] = 1'b1;
              grant_i[o] = 3'((int'(rr_q[o]) + k) % 5);
            end
          end
        end
      end
      if (grant_v[o]) pop[grant_i[o]] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 5; i++) begin
        wr_q[i]    <= '0;
        rd_q[i]    <= '0;
        cnt_q[i]   <= '0;
        route_q[i] <= '0;
        lock_q[i]  <= 1'b0;
        owner_q[i] <= '0;
        rr_q[i]    <= '0;
        cred_q[i]  <= CNT_W'(DEPTH);
        out_valid[i] <= 1'b0;
        out_flit[i]  <= '0;
        in_credit[i] <= 1'b0;
      end
    end else begin
      for (int i = 0; i < 5; i++) begin
        if (in_valid[i]) begin
          buf_q[i][wr_q[i]] <= in_flit[i];
          wr_q[i] <= (wr_q[i] == PTR_W'(DEPTH-1)) ? '0 : wr_q[i] + 1'b1;
        end
        if (pop[i]) begin
          rd_q[i] <= (rd_q[i] == PTR_W'(DEPTH-1)) ? '0 : rd_q[i] + 1'b1;
          if (head_flit[i].head) route_q[i] <= want[i];
        end
        cnt_q[i] <= cnt_q[i] + CNT_W'(in_valid[i]) - CNT_W'(pop[i]);
        in_credit[i] <= pop[i];
      end
      for (int o = 0; o < 5; o++) begin
        out_valid[o] <= grant_v[o];
        if (grant_v[o]) begin
          out_flit[o] <= head_flit[grant_i[o]];
          if (!lock_q[o]) begin
            rr_q[o]    <= (grant_i[o] == 3'd4) ? 3'd0 : grant_i[o] + 3'd1;
            owner_q[o] <= grant_i[o];
          end
          lock_q[o] <= !head_flit[grant_i[o]].tail;
        end
        cred_q[o] <= cred_q[o] - CNT_W'(grant_v[o]) + CNT_W'(out_credit[o]);
      end
    end
  end

  // A sender never overruns a buffer when credits are respected.
  for (genvar i = 0; i < 5; i++) begin : g_chk
    a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
      !(in_valid[i] && cnt_q[i] == CNT_W'(DEPTH) && !pop[i]));
  end

endmodule
