// tb_ppb_vc_fifo: self-checking test of the VC flit buffer, depth 4.
//
// Random writes (never when full) and reads (never when empty) are compared
// with a queue in the testbench: data order, empty, full and count. A
// directed fill checks that full rises after exactly DEPTH writes.
module tb_ppb_vc_fifo;
  import ppb_pkg::*;

  localparam int D = 4;

  logic clk = 0, rst_n = 0;
  logic wr_en, rd_en, empty, full;
  flit_t wr_data, rd_data;
  logic [2:0] count;

  int checks = 0, failures = 0;
  flit_t q [$];

  ppb_vc_fifo #(.T(flit_t), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    wr_en = 0; rd_en = 0; wr_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++; if (!empty || full || count != 0) failures++;
    // Directed fill.
    for (int i = 0; i < D; i++) begin
      wr_en = 1; wr_data = flit_t'({2'd1, 128'(i)});
      q.push_back(wr_data);
      @(negedge clk);
      checks++;
      if (full != (i == D - 1) || count != 3'(i + 1)) begin
        failures++; $display("FAIL fill %0d full=%0b count=%0d", i, full, count);
      end
    end
    wr_en = 0;
    // Random traffic.
    for (int r = 0; r < 3000; r++) begin
      wr_en = !full && ($urandom % 2);
      rd_en = !empty && ($urandom % 2);
      wr_data = flit_t'({2'($urandom), {4{32'($urandom)}}});
      #1;
      if (rd_en) begin
        checks++;
        if (rd_data != q[0]) begin failures++; $display("FAIL data order at %0d", r); end
        void'(q.pop_front());
      end
      if (wr_en) q.push_back(wr_data);
      @(negedge clk);
      checks++;
      if (count != 3'(q.size()) || empty != (q.size() == 0) || full != (q.size() == D)) begin
        failures++; $display("FAIL flags at %0d", r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
