// dls_mem_model: behavioural model of the off-chip memory behind the LLC
// banks, for simulation only. One port per bank; each port accepts a block
// request at any time (the banks issue at most one read at a time), answers
// a read LAT cycles later and performs a write at once. Contents start as
// init_line(address), a pattern any checker can recompute, and are kept in
// an associative array. Counts reads and writes.
module dls_mem_model
  import dls_pkg::*;
#(
  parameter int unsigned NB  = NCORES,
  parameter int unsigned LAT = 40
) (
  input  logic   clk,
  input  logic   mem_req_valid [NB],
  output logic   mem_req_ready [NB],
  input  logic   mem_req_we    [NB],
  input  laddr_t mem_req_addr  [NB],
  input  line_t  mem_req_wdata [NB],
  output logic   mem_rsp_valid [NB],
  output line_t  mem_rsp_data  [NB]
);
  line_t mem [laddr_t];
  int    reads  = 0;
  int    writes = 0;

  function automatic line_t init_line(laddr_t a);
    line_t l;
    for (int w = 0; w < 8; w++) l[w*64 +: 64] = {32'hC0DE0000 | 32'(w), 6'd0, a};
    return l;
  endfunction

  function automatic line_t peek(laddr_t a);
    return mem.exists(a) ? mem[a] : init_line(a);
  endfunction

  for (genvar b = 0; b < NB; b++) begin : g_port
    int     cnt = 0;
    laddr_t ra;
    assign mem_req_ready[b] = 1'b1;
    initial begin mem_rsp_valid[b] = 1'b0; mem_rsp_data[b] = '0; end
    always @(posedge clk) begin
      mem_rsp_valid[b] <= 1'b0;
      if (mem_req_valid[b]) begin
        if (mem_req_we[b]) begin
          mem[mem_req_addr[b]] = mem_req_wdata[b];
          writes++;
        end else begin
          ra  = mem_req_addr[b];
          cnt = LAT;
          reads++;
        end
      end else if (cnt > 1) begin
        cnt--;
      end else if (cnt == 1) begin
        cnt = 0;
        mem_rsp_valid[b] <= 1'b1;
        mem_rsp_data[b]  <= peek(ra);
      end
    end
  end
endmodule
