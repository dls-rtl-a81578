// mesh_link: one direction of a mesh link. It delays a flit (valid + data)
// by LAT register stages and carries the returning credit back through LAT
// stages of its own, modelling the 2-cycle wire delay between neighbouring
// tiles. The delay value follows the evaluated system; building it from
// plain register stages is this design's choice.
module mesh_link
  import dls_pkg::*;
#(
  parameter int unsigned LAT = 2
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  src_valid,
  input  flit_t src_flit,
  output logic  src_credit,   // credit delivered back to the sender
  output logic  dst_valid,
  output flit_t dst_flit,
  input  logic  dst_credit    // credit released by the receiver
);
  logic  v_q [LAT];
  flit_t f_q [LAT];
  logic  c_q [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) begin
        v_q[i] <= 1'b0;
        f_q[i] <= '0;
        c_q[i] <= 1'b0;
      end
    end else begin
      v_q[0] <= src_valid;
      f_q[0] <= src_flit;
      c_q[0] <= dst_credit;
      for (int i = 1; i < LAT; i++) begin
        v_q[i] <= v_q[i-1];
        f_q[i] <= f_q[i-1];
        c_q[i] <= c_q[i-1];
      end
    end
  end

  assign dst_valid  = v_q[LAT-1];
  assign dst_flit   = f_q[LAT-1];
  assign src_credit = c_q[LAT-1];
endmodule
