// tb_mesh_noc: self-checking test of the 4x4 mesh. First one single-flit
// packet from node 0 to node 15 measures the zero-load latency, expected
// 2 cycles per router (7 routers) plus 2 cycles per link (6 links) = 26.
// Then every node injects random one- and five-flit packets to random
// destinations under credit flow control; each node's ejection port checks
// that packets arrive at the addressed node only, whole and uncorrupted,
// and the end count checks that each packet was delivered exactly once.
module tb_mesh_noc;
  import dls_pkg::*;
  localparam int N = 16;
  localparam int NPKT = 30;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic  loc_in_valid [N], loc_in_credit [N], loc_out_valid [N], loc_out_credit [N];
  flit_t loc_in_flit [N], loc_out_flit [N];

  mesh_noc #(.NX(4), .NY(4), .DEPTH(8), .LINK_LAT(2)) dut (.*);

  int checks = 0, failures = 0;
  int credits [N], sent [N], idx [N];
  bit single [N];
  bit in_pkt [N];
  int cur_src [N], cur_seq [N], cur_idx [N];
  int got [N][NPKT];
  int recv = 0;
  bit run = 0, send_one = 0, lat_phase = 1;
  int t_send = 0, t_recv = -1;

  function automatic flit_t mk_head(int dst, int src, int seq, bit one);
    flit_t f; hdr_t h;
    h = '0; h.dst = id_t'(dst); h.src = id_t'(src); h.addr = laddr_t'(seq); h.has_data = !one;
    f.head = 1; f.tail = one; f.payload = FLIT_W'(h);
    return f;
  endfunction

  always @(negedge clk) if (rst_n) begin
    for (int n = 0; n < N; n++) begin
      flit_t f;
      hdr_t  h;
      if (loc_in_credit[n]) credits[n]++;
      loc_out_credit[n] = loc_out_valid[n];
      if (loc_out_valid[n]) begin
        f = loc_out_flit[n];
        if (lat_phase) t_recv = cyc;
        checks++;
        if (f.head) begin
          h = hdr_t'(f.payload[HDR_W-1:0]);
          if (int'(h.dst) != n || in_pkt[n]) begin
            failures++; $display("FAIL packet for %0d ejected at %0d", h.dst, n);
          end
          cur_src[n] = int'(h.src); cur_seq[n] = int'(h.addr); cur_idx[n] = 0;
          in_pkt[n] = !f.tail;
        end else begin
          cur_idx[n]++;
          if (!in_pkt[n] || f.payload != FLIT_W'({cur_src[n], cur_seq[n], cur_idx[n]})) begin
            failures++; $display("FAIL body flit at %0d", n);
          end
          if (f.tail) in_pkt[n] = 0;
        end
        if (f.tail) begin
          recv++;
          if (!lat_phase) got[cur_src[n]][cur_seq[n]]++;
        end
      end
      loc_in_valid[n] = 0;
      if (send_one && n == 0) begin
        loc_in_flit[0] = mk_head(15, 0, 0, 1);
        loc_in_valid[0] = 1; credits[0]--; t_send = cyc; send_one = 0;
      end
      if (run && credits[n] > 0 && sent[n] < NPKT && $urandom_range(0, 2) == 0) begin
        if (idx[n] == 0) begin
          single[n] = $urandom_range(0, 1);
          loc_in_flit[n] = mk_head(int'($urandom_range(0, N-1)), n, sent[n], single[n]);
          if (single[n]) sent[n]++; else idx[n] = 1;
        end else begin
          loc_in_flit[n].head = 0;
          loc_in_flit[n].tail = (idx[n] == 4);
          loc_in_flit[n].payload = FLIT_W'({n, sent[n], idx[n]});
          if (idx[n] == 4) begin idx[n] = 0; sent[n]++; end else idx[n]++;
        end
        loc_in_valid[n] = 1; credits[n]--;
      end
    end
  end

  initial begin
    for (int n = 0; n < N; n++) begin
      loc_in_valid[n] = 0; loc_in_flit[n] = '0; loc_out_credit[n] = 0;
      credits[n] = 8; sent[n] = 0; idx[n] = 0; in_pkt[n] = 0;
      for (int k = 0; k < NPKT; k++) got[n][k] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    send_one = 1;
    repeat (40) @(negedge clk);
    checks++;
    if (t_recv - t_send != 26) begin
      failures++; $display("FAIL mesh latency %0d, expected 26", t_recv - t_send);
    end
    lat_phase = 0; recv = 0;
    run = 1;
    wait (recv == N * NPKT);
    repeat (20) @(negedge clk);
    for (int n = 0; n < N; n++)
      for (int k = 0; k < NPKT; k++) begin
        checks++;
        if (got[n][k] != 1) begin failures++; $display("FAIL node %0d packet %0d seen %0d times", n, k, got[n][k]); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
