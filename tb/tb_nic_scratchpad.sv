// tb_nic_scratchpad: six ports issue random reads and writes to a small set
// of addresses of the 256 KB, 4-bank NIC scratch-pad, so requests collide on
// banks and reads follow writes closely. A port keeps its request until it is
// granted. Checks: at most one grant per bank per cycle, every read returns
// exactly two cycles after its grant with the data of the latest write granted
// before it (a reference array updated at grant time), no stray responses,
// and every port gets served (the watchdog catches starvation).
module tb_nic_scratchpad;
  import cargo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [5:0] req_valid, req_ready, req_we, rsp_valid;
  logic [17:0] req_addr [6];
  word_t req_wdata [6], rsp_rdata [6];

  nic_scratchpad dut (.clk, .rst_n, .req_valid, .req_ready, .req_we, .req_addr, .req_wdata,
                      .rsp_valid, .rsp_rdata);

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

  word_t ref_m [logic [17:0]];
  word_t exp_d [6][$]; int exp_t [6][$];
  int served [6];
  initial begin
    req_valid = '0; req_we = '0;
    for (int p = 0; p < 6; p++) begin req_addr[p] = '0; req_wdata[p] = '0; served[p] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    // initialise the addresses used so every read has a known value
    for (int a = 0; a < 32; a++) begin
      @(negedge clk);
      req_valid = 6'b000001; req_we = 6'b000001; req_addr[0] = 18'(a * 8); req_wdata[0] = 64'(a);
      ref_m[18'(a * 8)] = 64'(a);
      #4; chk(req_ready[0], "lone request granted");
    end
    @(negedge clk); req_valid = '0;
    repeat (3) @(negedge clk);
    for (int i = 0; i < 3000; i++) begin
      logic [3:0] bank_cnt [4];
      if (i > 0) @(negedge clk);
      for (int p = 0; p < 6; p++)
        if (!req_valid[p] || req_ready[p]) begin
          req_valid[p] = ($urandom_range(99) < 60);
          req_we[p]    = ($urandom_range(99) < 40);
          req_addr[p]  = 18'($urandom_range(31) * 8);
          req_wdata[p] = {$urandom, $urandom};
        end
      #4;
      // responses due now
      for (int p = 0; p < 6; p++) begin
        if (exp_t[p].size() > 0 && exp_t[p][0] == i) begin
          chk(rsp_valid[p] && rsp_rdata[p] == exp_d[p][0], $sformatf("read data port %0d", p));
          void'(exp_t[p].pop_front()); void'(exp_d[p].pop_front());
        end else chk(!rsp_valid[p], $sformatf("no stray response port %0d", p));
      end
      for (int b = 0; b < 4; b++) bank_cnt[b] = 0;
      for (int p = 0; p < 6; p++) if (req_valid[p] && req_ready[p]) begin
        bank_cnt[req_addr[p][4:3]]++;
        served[p]++;
        if (req_we[p]) ref_m[req_addr[p]] = req_wdata[p];
        else begin exp_d[p].push_back(ref_m[req_addr[p]]); exp_t[p].push_back(i + 2); end
      end
      for (int p = 0; p < 6; p++) chk(!(req_ready[p] && !req_valid[p]), "no grant without request");
      for (int b = 0; b < 4; b++) chk(bank_cnt[b] <= 1, "one grant per bank");
    end
    for (int p = 0; p < 6; p++) chk(served[p] > 100, $sformatf("port %0d served", p));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
