// tb_pkt_scheduler: random push/pop traffic against a queue model of the
// NIC packet scheduler. Checks first-in first-out order of the packet
// arguments, the round-robin core number given to each packet at arrival
// (0, 1, 2, 3, 0, ...), in_ready low exactly when 16 packets are queued, and
// the occupancy output. Inputs change on the falling edge; outputs are
// sampled just before the rising edge.
module tb_pkt_scheduler;
  import cargo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  word_t in_args [2], out_args [2];
  logic [1:0] out_core;
  logic [4:0] occ;

  pkt_scheduler dut (.clk, .rst_n, .in_valid, .in_ready, .in_args, .out_valid, .out_ready,
                     .out_args, .out_core, .occupancy(occ));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  word_t qa [$], qb [$]; logic [1:0] qc [$];
  logic [1:0] rr = 0;
  int full_seen = 0;
  initial begin
    in_args[0] = '0; in_args[1] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      // phase-dependent rates so the queue both fills and drains
      in_valid  = ($urandom_range(99) < ((cyc / 500) % 2 == 0 ? 80 : 30));
      out_ready = ($urandom_range(99) < ((cyc / 500) % 2 == 0 ? 30 : 80));
      in_args[0] = {$urandom, $urandom}; in_args[1] = {$urandom, $urandom};
      #4;
      chk(occ == 5'(qa.size()), "occupancy");
      chk(in_ready == (qa.size() < 16), "in_ready iff not full");
      chk(out_valid == (qa.size() > 0), "out_valid iff not empty");
      if (qa.size() == 16) full_seen++;
      if (out_valid && qa.size() > 0)
        chk(out_args[0] == qa[0] && out_args[1] == qb[0] && out_core == qc[0], "FIFO head");
      @(posedge clk);
      if (out_valid && out_ready && qa.size() > 0) begin
        void'(qa.pop_front()); void'(qb.pop_front()); void'(qc.pop_front());
      end
      if (in_valid && in_ready) begin
        qa.push_back(in_args[0]); qb.push_back(in_args[1]); qc.push_back(rr); rr++;
      end
    end
    chk(full_seen > 0, "queue became full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
