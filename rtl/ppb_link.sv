// ppb_link: one direction of a mesh link, a pipeline of LAT register
// stages. The paper lists a 2-cycle link latency; the link carries a flit
// with its VC number forward and, in the opposite direction, the credit
// returned by the downstream buffer, both delayed by LAT cycles. A value
// entering in cycle c leaves in cycle c+LAT. LAT must be at least 1.
module ppb_link
  import ppb_pkg::*;
#(
  parameter int unsigned LAT = 2
) (
  input  logic     clk,
  input  logic     rst_n,
  input  link_t    fwd_in,
  output link_t    fwd_out,
  input  credit_t  crd_in,
  output credit_t  crd_out
);

  link_t   fwd_q [LAT];
  credit_t crd_q [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) begin
        fwd_q[i] <= '0;
        crd_q[i] <= '0;
      end
    end else begin
      fwd_q[0] <= fwd_in;
      crd_q[0] <= crd_in;
      for (int i = 1; i < LAT; i++) begin
        fwd_q[i] <= fwd_q[i-1];
        crd_q[i] <= crd_q[i-1];
      end
    end
  end

  assign fwd_out = fwd_q[LAT-1];
  assign crd_out = crd_q[LAT-1];

endmodule
