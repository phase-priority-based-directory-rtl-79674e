// tb_ppb_link: self-checking test of the pipelined link at its default
// latency of 2 cycles. Random flits and credits are sent every cycle; each
// must come out unchanged exactly LAT cycles later.
module tb_ppb_link;
  import ppb_pkg::*;

  localparam int LAT = 2;

  logic clk = 0, rst_n = 0;
  link_t fwd_in, fwd_out;
  credit_t crd_in, crd_out;
  int checks = 0, failures = 0;

  ppb_link dut (.*);

  always #5 clk = ~clk;

  link_t   hist_f [$];
  credit_t hist_c [$];

  initial begin
    fwd_in = '0; crd_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < LAT; i++) begin hist_f.push_back('0); hist_c.push_back('0); end
    for (int r = 0; r < 500; r++) begin
      @(negedge clk);
      checks++;
      if (fwd_out != hist_f[0] || crd_out != hist_c[0]) begin
        failures++; $display("FAIL cycle %0d", r);
      end
      void'(hist_f.pop_front()); void'(hist_c.pop_front());
      fwd_in = link_t'({1'($urandom), 3'($urandom), 2'($urandom), {4{32'($urandom)}}});
      crd_in = credit_t'(4'($urandom));
      hist_f.push_back(fwd_in); hist_c.push_back(crd_in);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
