// tb_ppb_phase_stamper: self-checking test of the directory phase stamper.
//
// Messages of several message types and lines are pushed through with a
// random ready on the output. Each output message is checked against a
// reference: outer phase 01 for messages to L1 caches, 10 for memory
// messages; inner phase 0 for memory messages, otherwise the per-line
// transaction count kept in the testbench (fewer than 32 lines are used, so
// the buffer never forgets one). Other fields must pass unchanged, and the
// buffer must only count handed-on messages.
module tb_ppb_phase_stamper;
  import ppb_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, in_new_txn, out_valid, out_ready, buf_hit, buf_evict;
  msg_t in_msg, out_msg;

  int checks = 0, failures = 0;
  int seen_second = 0, seen_third = 0;

  ppb_phase_stamper #(.ENTRIES(32)) dut (.*);

  always #5 clk = ~clk;

  int ref_ph [int];   // line -> latest inner phase

  msg_type_e dir_types [6] = '{MSG_FWD_GETS, MSG_FWD_GETX, MSG_INV, MSG_DATA,
                               MSG_DATA_EXCL, MSG_MEM_GETS};

  initial begin
    in_valid = 0; in_new_txn = 0; in_msg = '0; out_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 2000; r++) begin
      int line, exp_inner;
      logic exp_hit;
      outer_e exp_outer;
      @(negedge clk);
      line = $urandom % 20;
      in_msg = '0;
      in_msg.mtype = (r % 7 == 6) ? MSG_MEM_WB : dir_types[$urandom % 6];
      in_msg.laddr = LADDR_W'(line + 64);
      in_msg.dst   = node_t'($urandom);
      in_msg.acks  = 8'($urandom);
      in_msg.data  = {16{32'($urandom)}};
      in_msg.phase = phase_t'($urandom);      // must be overwritten
      in_new_txn   = 1'($urandom);
      in_valid     = 1;
      out_ready    = ($urandom % 3) != 0;
      #1;
      exp_outer = (in_msg.mtype inside {MSG_MEM_GETS, MSG_MEM_WB}) ? OUTER_THIRD : OUTER_SECOND;
      exp_hit   = ref_ph.exists(line);
      if (exp_outer == OUTER_THIRD) exp_inner = 0;
      else if (!exp_hit)            exp_inner = 0;
      else                          exp_inner = in_new_txn ? (ref_ph[line] + 1) % 64 : ref_ph[line];
      checks++;
      if (!out_valid || in_ready != out_ready || out_msg.phase.outer != exp_outer ||
          out_msg.phase.inner != exp_inner[5:0] || out_msg.laddr != in_msg.laddr ||
          out_msg.data != in_msg.data || out_msg.dst != in_msg.dst ||
          out_msg.acks != in_msg.acks || out_msg.mtype != in_msg.mtype) begin
        failures++;
        $display("FAIL r=%0d type=%s line=%0d phase %0h exp outer %0d inner %0d",
                 r, in_msg.mtype.name(), line, out_msg.phase, exp_outer, exp_inner);
      end
      if (exp_outer == OUTER_SECOND) begin
        checks++;
        if (buf_hit != exp_hit) begin failures++; $display("FAIL hit flag"); end
      end
      if (out_ready) begin
        if (exp_outer == OUTER_SECOND) begin ref_ph[line] = exp_inner; seen_second++; end
        else seen_third++;
      end
      @(posedge clk);
    end
    checks++;
    if (seen_second == 0 || seen_third == 0) failures++;
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
