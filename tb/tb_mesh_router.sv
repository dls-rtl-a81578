// tb_mesh_router: self-checking test of one mesh router placed at (1,1) of
// the 4x4 mesh. Phase 1 sends a single one-flit packet and checks the
// 2-cycle router latency. Phase 2 has all five inputs send random one- and
// five-flit packets to random nodes at full rate with credit flow control;
// each output checks that every packet leaves on the X-then-Y port, that
// the flits of a packet stay together and in order, and that every packet
// arrives exactly once. Downstream buffers return a credit per flit.
module tb_mesh_router;
  import dls_pkg::*;
  localparam int NPKT = 60;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic [4:0] in_valid, in_credit, out_valid, out_credit;
  flit_t      in_flit [5];
  flit_t      out_flit[5];

  mesh_router #(.MY_X(1), .MY_Y(1), .DEPTH(8)) dut (.*);

  int checks = 0, failures = 0;

  function automatic int exp_port(int dst);
    int x, y;
    x = dst % 4;
    y = dst / 4;
    if (x > 1) return 2;
    if (x < 1) return 4;
    if (y < 1) return 1;
    if (y > 1) return 3;
    return 0;
  endfunction

  function automatic flit_t mk_head(int dst, int src, int seq, bit single);
    flit_t f; hdr_t h;
    h = '0; h.dst = id_t'(dst); h.src = id_t'(src); h.addr = laddr_t'(seq); h.has_data = !single;
    f.head = 1; f.tail = single; f.payload = FLIT_W'(h);
    return f;
  endfunction

  // ---- senders ----
  int credits [5];
  int sent_pk [5];
  int recv_pk = 0, expect_pk = 0;
  bit run = 0;
  bit send_one = 0;
  int state_idx [5];
  int cur_dst [5];
  bit cur_single [5];

  // ---- receivers ----
  bit  in_pkt [5];
  int  cur_src [5], cur_seq [5], cur_idx [5];
  int  got [5][NPKT];
  bit  lat_phase = 1;
  int  t_send = 0, t_recv = -1;

  always @(negedge clk) if (rst_n) begin
    // credit returns
    for (int i = 0; i < 5; i++) if (in_credit[i]) credits[i]++;
    out_credit = out_valid;
    // receive
    for (int o = 0; o < 5; o++) if (out_valid[o]) begin
      flit_t f;
      hdr_t  h;
      f = out_flit[o];
      if (lat_phase) t_recv = cyc;
      if (f.head) begin
        h = hdr_t'(f.payload[HDR_W-1:0]);
        checks++;
        if (in_pkt[o]) begin failures++; $display("FAIL head inside packet on out %0d", o); end
        if (exp_port(int'(h.dst)) != o) begin
          failures++; $display("FAIL dst %0d left on port %0d cyc %0d flit %h", h.dst, o, cyc, f);
        end
        cur_src[o] = int'(h.src); cur_seq[o] = int'(h.addr); cur_idx[o] = 0;
        in_pkt[o] = !f.tail;
        if (f.tail) got[cur_src[o]][cur_seq[o]]++;
      end else begin
        checks++;
        cur_idx[o]++;
        if (!in_pkt[o] || f.payload != FLIT_W'({cur_src[o], cur_seq[o], cur_idx[o]})) begin
          failures++; $display("FAIL body flit on out %0d: %h", o, f.payload);
        end
        if (f.tail) begin
          in_pkt[o] = 0;
          got[cur_src[o]][cur_seq[o]]++;
          checks++;
          if (cur_idx[o] != 4) begin failures++; $display("FAIL packet of %0d body flits", cur_idx[o]); end
        end
      end
      if (f.tail) recv_pk++;
    end
    // send
    in_valid = '0;
    if (send_one) begin
      in_flit[4] = mk_head(6, 4, 0, 1);   // node 6 = (2,1): leaves east
      in_valid[4] = 1; credits[4]--;
      t_send = cyc;
      send_one = 0;
    end
    if (run) for (int i = 0; i < 5; i++) begin
      if (credits[i] > 0 && sent_pk[i] < NPKT && $urandom_range(0, 3) != 0) begin
        if (state_idx[i] == 0) begin
          cur_dst[i] = int'($urandom_range(0, 15));
          cur_single[i] = $urandom_range(0, 1);
          in_flit[i] = mk_head(cur_dst[i], i, sent_pk[i], cur_single[i]);
          state_idx[i] = cur_single[i] ? 0 : 1;
          if (cur_single[i]) sent_pk[i]++;
        end else begin
          in_flit[i].head = 0;
          in_flit[i].tail = (state_idx[i] == 4);
          in_flit[i].payload = FLIT_W'({i, sent_pk[i], state_idx[i]});
          if (state_idx[i] == 4) begin state_idx[i] = 0; sent_pk[i]++; end
          else state_idx[i]++;
        end
        in_valid[i] = 1;
        credits[i]--;
      end
    end
  end

  initial begin
    in_valid = '0; out_credit = '0;
    for (int i = 0; i < 5; i++) begin
      in_flit[i] = '0; credits[i] = 8; sent_pk[i] = 0; state_idx[i] = 0; in_pkt[i] = 0;
      for (int k = 0; k < NPKT; k++) got[i][k] = 0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---- phase 1: zero-load latency, west input to a node east of us ----
    send_one = 1;
    repeat (8) @(negedge clk);
    checks++;
    if (t_recv - t_send != 2) begin
      failures++; $display("FAIL router latency %0d, expected 2", t_recv - t_send);
    end
    got[4][0] = 0; recv_pk = 0;
    lat_phase = 0;
    // ---- phase 2: random traffic on all inputs ----
    run = 1;
    wait (recv_pk == 5 * NPKT);
    repeat (10) @(negedge clk);
    for (int i = 0; i < 5; i++)
      for (int k = 0; k < NPKT; k++) begin
        checks++;
        if (got[i][k] != 1) begin failures++; $display("FAIL input %0d packet %0d seen %0d times", i, k, got[i][k]); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
