// dls_cmp: the 16-core tiled chip multiprocessor with a directoryless
// shared last-level cache (DLS). Each of the 16 tiles on the 4x4 mesh holds
// one core's private L1 data cache (pc_ctrl), one 1 MB bank of the 16 MB
// S-NUCA LLC (llc_bank, home of the blocks whose block address has the
// tile's id in its low 4 bits) and a network interface (dls_ni). Three 4x4
// meshes (mesh_noc) carry requests, interventions and replies.
// The cores themselves and the memory controllers are outside this module:
// per tile a core port (load/store/sync requests, load results with the
// speculation flag, and speculation checks) and per bank a memory port
// (one 512-bit block per request) are brought out as arrays.
// Reset: after rst_n rises the LLC banks clear their tags for LLC_SETS
// cycles; init_done goes high when all have finished.
module dls_cmp
  import dls_pkg::*;
#(
  parameter int unsigned PC_SETS  = 256,
  parameter int unsigned PC_WAYS  = 4,
  parameter int unsigned LLC_SETS = 4096,
  parameter int unsigned LLC_WAYS = 4,
  parameter int unsigned PC_LAT   = 3,
  parameter int unsigned LLC_LAT  = 10,
  parameter int unsigned BUF      = 8,
  parameter int unsigned LINK_LAT = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic        init_done,
  // cores
  input  logic        core_req_valid [NCORES],
  output logic        core_req_ready [NCORES],
  input  core_op_e    core_req_op    [NCORES],
  input  logic [ADDR_W-1:0] core_req_addr [NCORES],
  input  word_t       core_req_wdata [NCORES],
  input  logic [7:0]  core_req_wstrb [NCORES],
  output logic        core_resp_valid[NCORES],
  output word_t       core_resp_rdata[NCORES],
  output logic        core_resp_spec [NCORES],
  output logic        core_chk_valid [NCORES],
  output logic        core_chk_ok    [NCORES],
  output word_t       core_chk_data  [NCORES],
  // memory, one port per LLC bank
  output logic        mem_req_valid  [NCORES],
  input  logic        mem_req_ready  [NCORES],
  output logic        mem_req_we     [NCORES],
  output laddr_t      mem_req_addr   [NCORES],
  output line_t       mem_req_wdata  [NCORES],
  input  logic        mem_rsp_valid  [NCORES],
  input  line_t       mem_rsp_data   [NCORES]
);
  // network local ports, [net][node]: net 0 REQ, 1 FWD, 2 RESP
  logic  inj_valid [3][NCORES];
  flit_t inj_flit  [3][NCORES];
  logic  inj_credit[3][NCORES];
  logic  ej_valid  [3][NCORES];
  flit_t ej_flit   [3][NCORES];
  logic  ej_credit [3][NCORES];

  for (genvar k = 0; k < 3; k++) begin : g_net
    mesh_noc #(.NX(MESH_X), .NY(MESH_Y), .DEPTH(BUF), .LINK_LAT(LINK_LAT)) u_mesh (
      .clk, .rst_n,
      .loc_in_valid  (inj_valid[k]),
      .loc_in_flit   (inj_flit[k]),
      .loc_in_credit (inj_credit[k]),
      .loc_out_valid (ej_valid[k]),
      .loc_out_flit  (ej_flit[k]),
      .loc_out_credit(ej_credit[k])
    );
  end

  logic [NCORES-1:0] bank_done;
  assign init_done = &bank_done;

  for (genvar n = 0; n < NCORES; n++) begin : g_tile
    logic pc_req_v, pc_req_r, pc_rsp_v, pc_rsp_r, pc_fwd_v, pc_fwd_r, pc_rin_v, pc_rin_r;
    logic l_req_v, l_req_r, l_fwd_v, l_fwd_r, l_rsp_v, l_rsp_r, l_rin_v, l_rin_r;
    msg_t pc_req_m, pc_rsp_m, pc_fwd_m, pc_rin_m, l_req_m, l_fwd_m, l_rsp_m, l_rin_m;
    logic  t_inj_valid[3], t_inj_credit[3], t_ej_valid[3], t_ej_credit[3];
    flit_t t_inj_flit[3], t_ej_flit[3];

    for (genvar k = 0; k < 3; k++) begin : g_port
      assign inj_valid[k][n] = t_inj_valid[k];
      assign inj_flit[k][n]  = t_inj_flit[k];
      assign t_inj_credit[k] = inj_credit[k][n];
      assign t_ej_valid[k]   = ej_valid[k][n];
      assign t_ej_flit[k]    = ej_flit[k][n];
      assign ej_credit[k][n] = t_ej_credit[k];
    end

    pc_ctrl #(.MY_ID(n), .SETS(PC_SETS), .WAYS(PC_WAYS), .HIT_LAT(PC_LAT)) u_pc (
      .clk, .rst_n,
      .core_req_valid (core_req_valid[n]),  .core_req_ready (core_req_ready[n]),
      .core_req_op    (core_req_op[n]),     .core_req_addr  (core_req_addr[n]),
      .core_req_wdata (core_req_wdata[n]),  .core_req_wstrb (core_req_wstrb[n]),
      .core_resp_valid(core_resp_valid[n]), .core_resp_rdata(core_resp_rdata[n]),
      .core_resp_spec (core_resp_spec[n]),
      .core_chk_valid (core_chk_valid[n]),  .core_chk_ok    (core_chk_ok[n]),
      .core_chk_data  (core_chk_data[n]),
      .req_valid(pc_req_v), .req_ready(pc_req_r), .req_msg(pc_req_m),
      .rsp_valid(pc_rsp_v), .rsp_ready(pc_rsp_r), .rsp_msg(pc_rsp_m),
      .fwd_valid(pc_fwd_v), .fwd_ready(pc_fwd_r), .fwd_msg(pc_fwd_m),
      .rin_valid(pc_rin_v), .rin_ready(pc_rin_r), .rin_msg(pc_rin_m)
    );

    llc_bank #(.MY_ID(n), .SETS(LLC_SETS), .WAYS(LLC_WAYS), .LAT(LLC_LAT)) u_llc (
      .clk, .rst_n, .init_done(bank_done[n]),
      .req_valid(l_req_v), .req_ready(l_req_r), .req_msg(l_req_m),
      .fwd_valid(l_fwd_v), .fwd_ready(l_fwd_r), .fwd_msg(l_fwd_m),
      .rsp_valid(l_rsp_v), .rsp_ready(l_rsp_r), .rsp_msg(l_rsp_m),
      .rin_valid(l_rin_v), .rin_ready(l_rin_r), .rin_msg(l_rin_m),
      .mem_req_valid(mem_req_valid[n]), .mem_req_ready(mem_req_ready[n]),
      .mem_req_we(mem_req_we[n]), .mem_req_addr(mem_req_addr[n]),
      .mem_req_wdata(mem_req_wdata[n]),
      .mem_rsp_valid(mem_rsp_valid[n]), .mem_rsp_data(mem_rsp_data[n])
    );

    dls_ni #(.DEPTH(BUF)) u_ni (
      .clk, .rst_n,
      .pc_req_valid(pc_req_v),  .pc_req_ready(pc_req_r),  .pc_req(pc_req_m),
      .pc_rsp_valid(pc_rsp_v),  .pc_rsp_ready(pc_rsp_r),  .pc_rsp(pc_rsp_m),
      .pc_fwd_valid(pc_fwd_v),  .pc_fwd_ready(pc_fwd_r),  .pc_fwd(pc_fwd_m),
      .pc_rin_valid(pc_rin_v),  .pc_rin_ready(pc_rin_r),  .pc_rin(pc_rin_m),
      .llc_req_valid(l_req_v),  .llc_req_ready(l_req_r),  .llc_req(l_req_m),
      .llc_fwd_valid(l_fwd_v),  .llc_fwd_ready(l_fwd_r),  .llc_fwd(l_fwd_m),
      .llc_rsp_valid(l_rsp_v),  .llc_rsp_ready(l_rsp_r),  .llc_rsp(l_rsp_m),
      .llc_rin_valid(l_rin_v),  .llc_rin_ready(l_rin_r),  .llc_rin(l_rin_m),
      .inj_valid(t_inj_valid), .inj_flit(t_inj_flit), .inj_credit(t_inj_credit),
      .ej_valid(t_ej_valid),   .ej_flit(t_ej_flit),   .ej_credit(t_ej_credit)
    );
  end

endmodule
