// tb_cargo_top: end-to-end test of the CARGO design at its default sizes
// (256-entry context cache, 4096-miss epochs, 6 NIC cores, 256 KB scratch-pad).
//
// The testbench plays the CPU core and the host memory. The CPU runs a
// memcached-style hash lookup (the paper's running example: load the table
// base PC-relative, load the bucket head, walk the chain comparing a key byte,
// read a value byte on a hit) at the paper's example PCs, one committed
// instruction per cycle, preceded for every lookup by the two user-routine
// results (hash = argument 1, key = argument 2) that the NIC reports.
//   Phase A: one epoch of unrelated L2-missing loads spread over 65 PCs, so
//            that a cache set overflows (replacement) and the shipped region
//            is larger than the NIC's region buffer (instructions dropped).
//            A few packets run that region: every instruction is skipped,
//            because it reads a register the NIC does not know.
//   Phase B: one epoch of lookups. A backward jump that bypasses the region
//            closes the loop around the lookup code.
//   Phase C: packets (hash, key) are sent to the NIC in a burst that fills
//            the scheduler. For every packet the NIC's PCIe read addresses
//            must start with the addresses the lookup really reads (table
//            cell, bucket, key bytes, next pointers, value byte), and every
//            request must carry the steering tag of the packet's core.
// The host memory answers each read after 40 cycles (250 ns at the NIC's
// 166 MHz). At the end every mechanism pulse of ev must have fired at least
// once.
module tb_cargo_top;
  import cargo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // ---------------- DUT ----------------
  logic cm_valid;  commit_t cm;
  logic arg_valid; logic [3:0] arg_id; word_t arg_val;
  logic pkt_valid, pkt_ready; word_t pkt_args [2]; logic [4:0] qlen;
  logic mem_req_valid, mem_req_4dw; logic [127:0] mem_req_hdr; word_t mem_req_addr;
  logic mem_rsp_valid; word_t mem_rsp_data;
  logic [4:0] nc_req_valid, nc_req_ready, nc_req_we, nc_rsp_valid;
  logic [17:0] nc_req_addr [5]; word_t nc_req_wdata [5], nc_rsp_rdata [5];
  logic rx_valid, rx_offloaded; logic [1:0] rx_core;
  logic grv; word_t gfirst, glast;
  ev_t ev;

  cargo_top dut (.clk, .rst_n, .cm_valid, .cm, .arg_valid, .arg_id, .arg_val,
    .pkt_valid, .pkt_ready, .pkt_args, .pkt_queue_len(qlen),
    .mem_req_valid, .mem_req_ready(1'b1), .mem_req_hdr, .mem_req_4dw, .mem_req_addr,
    .mem_rsp_valid, .mem_rsp_data,
    .nc_req_valid, .nc_req_ready, .nc_req_we, .nc_req_addr, .nc_req_wdata,
    .nc_rsp_valid, .nc_rsp_rdata,
    .rx_valid, .rx_core, .rx_offloaded,
    .gen_rd_reg(RAX), .gen_rd_valid(grv), .gen_rd_first(gfirst), .gen_rd_last(glast), .ev);

  initial begin
    nc_req_valid = '0; nc_req_we = '0;
    for (int i = 0; i < 5; i++) begin nc_req_addr[i] = '0; nc_req_wdata[i] = '0; end
  end

  // ---------------- host memory ----------------
  localparam word_t TBASE = 64'h1000_0000, IBASE = 64'h2000_0000, PTRCELL = 64'h41d578;
  localparam int NB = 64, NITEMS = 200;
  word_t mem [word_t];

  function automatic word_t rd(word_t a);
    word_t k = {a[63:3], 3'b000};
    return mem.exists(k) ? mem[k] : '0;
  endfunction
  function automatic word_t item(int i); return IBASE + 64'(i) * 64; endfunction
  function automatic logic [7:0] key_of(int i); return 8'((i * 37 + 11) & 255); endfunction

  // PCIe completions: fixed latency, one request at a time from the NIC
  word_t rsp_q [$]; int rsp_t [$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) begin
    mem_rsp_valid <= 1'b0;
    if (rst_n && mem_req_valid) begin rsp_q.push_back(rd(mem_req_addr)); rsp_t.push_back(cyc + 40); end
    if (rsp_t.size() > 0 && cyc >= rsp_t[0]) begin
      mem_rsp_valid <= 1'b1; mem_rsp_data <= rsp_q.pop_front(); void'(rsp_t.pop_front());
    end
  end

  // ---------------- event counters ----------------
  int n_ev [15];
  always @(posedge clk) if (rst_n) for (int b = 0; b < 15; b++) if (ev[b]) n_ev[b]++;
  string ev_name [15] = '{"pkt_stall", "rgn_drop", "step_limit", "load", "inst_skip",
                          "inst_exec", "region_loaded", "epoch", "dyn_match", "root",
                          "evict", "bwd_add", "alloc_br", "alloc_pend", "alloc_miss"};

  // ---------------- CPU commit stream ----------------
  task automatic commit(input word_t pc, input uop_t u, input word_t s1, input word_t s2,
                        input word_t d, input logic miss, input logic taken, input word_t tgt);
    cm_valid = 1; cm = '0;
    cm.pc = pc; cm.uop = u; cm.src1_val = s1; cm.src2_val = s2; cm.dst_val = d;
    cm.l2_miss = miss; cm.br_taken = taken; cm.br_target = tgt;
    @(negedge clk);
    cm_valid = 0;
  endtask

  function automatic uop_t mk(op_e op, logic dv, reg_id_t d, logic v1, reg_id_t s1,
                              logic v2, reg_id_t s2, logic [31:0] disp);
    uop_t u = '0;
    u.op = op; u.dst_v = dv; u.dst = d; u.src1_v = v1; u.src1 = s1;
    u.src2_v = v2; u.src2 = s2; u.disp = disp;
    return u;
  endfunction

  word_t r [16];   // CPU register file

  task automatic jmp(input op_e op, input word_t pc, input word_t tgt, input logic taken);
    commit(pc, mk(op, 0, RAX, 0, RAX, 0, RAX, 32'(tgt - pc)), 0, 0, 0, 0, taken, tgt);
  endtask

  // one hash lookup on the CPU
  task automatic cpu_lookup(input int h, input logic [7:0] key);
    uop_t u; word_t a;
    @(negedge clk);
    arg_valid = 1; arg_id = 4'd1; arg_val = 64'(h);   @(negedge clk);
    arg_id = 4'd2; arg_val = 64'(key);                 @(negedge clk);
    arg_valid = 0;
    r[RDX] = 64'(h); r[RBP] = 64'(key);
    commit(64'h41b500, mk(OP_ADD, 1, RCX, 1, RCX, 0, RAX, 1), r[RCX], 0, r[RCX] + 1, 0, 0, 0);
    r[RCX]++;
    u = mk(OP_LOAD, 1, RAX, 0, RAX, 0, RAX, 32'(PTRCELL - 64'h41b571)); u.rip_rel = 1;
    r[RAX] = rd(PTRCELL);
    commit(64'h41b571, u, 0, 0, r[RAX], 0, 0, 0);
    u = mk(OP_LOAD, 1, RBX, 1, RAX, 1, RDX, 0); u.scale = 2'd3;
    a = r[RAX] + (r[RDX] << 3);
    commit(64'h41b578, u, r[RAX], r[RDX], rd(a), 1, 0, 0);
    r[RBX] = rd(a);
    jmp(OP_JMP, 64'h41b57c, 64'h41b584, 1);
    forever begin
      commit(64'h41b584, mk(OP_TEST, 0, RAX, 1, RBX, 1, RBX, 0), r[RBX], r[RBX], 0, 0, 0, 0);
      jmp(OP_JE, 64'h41b587, 64'h41b5b0, r[RBX] == 0);
      if (r[RBX] == 0) break;
      u = mk(OP_LOAD, 1, RAX, 1, RBX, 0, RAX, 32'h34); u.byte_ld = 1;
      a = r[RBX] + 64'h34;
      r[RAX] = 64'(rd(a) >> (8 * a[2:0]) & 64'hff);
      commit(64'h41b589, u, r[RBX], 0, r[RAX], 1, 0, 0);
      commit(64'h41b58d, mk(OP_CMP, 0, RAX, 1, RAX, 1, RBP, 0), r[RAX], r[RBP], 0, 0, 0, 0);
      jmp(OP_JNE, 64'h41b590, 64'h41b580, r[RAX] != r[RBP]);
      if (r[RAX] == r[RBP]) begin
        u = mk(OP_LOAD, 1, RAX, 1, RBX, 0, RAX, 32'h2b); u.byte_ld = 1;
        a = r[RBX] + 64'h2b;
        r[RAX] = 64'(rd(a) >> (8 * a[2:0]) & 64'hff);
        commit(64'h41b592, u, r[RBX], 0, r[RAX], 1, 0, 0);
        break;
      end
      u = mk(OP_LOAD, 1, RBX, 1, RBX, 0, RAX, 32'h10);
      a = r[RBX] + 64'h10;
      commit(64'h41b580, u, r[RBX], 0, rd(a), 1, 0, 0);
      r[RBX] = rd(a);
    end
    commit(64'h41b5b0, mk(OP_ADD, 1, RCX, 1, RCX, 0, RAX, 1), r[RCX], 0, r[RCX] + 1, 0, 0, 0);
    r[RCX]++;
    jmp(OP_JMP, 64'h41b600, 64'h41b500, 1);
  endtask

  // addresses the lookup reads, in program order
  function automatic void lookup_addrs(input int h, input logic [7:0] key, ref word_t q [$]);
    word_t p;
    q.delete();
    q.push_back(PTRCELL);
    q.push_back(TBASE + 64'(h) * 8);
    p = rd(TBASE + 64'(h) * 8);
    while (p != 0) begin
      q.push_back(p + 64'h34);
      if (8'(rd(p + 64'h34) >> 32) == key) begin q.push_back(p + 64'h2b); break; end
      q.push_back(p + 64'h10);
      p = rd(p + 64'h10);
    end
  endfunction

  // ---------------- NIC side checking ----------------
  int exp_h [$]; logic [7:0] exp_k [$];
  word_t seen_a [$]; logic [7:0] seen_st [$];
  logic checking = 0;
  int pkts_checked = 0;
  always @(posedge clk) begin
    if (rst_n && mem_req_valid) begin
      seen_a.push_back(mem_req_addr);
      seen_st.push_back(mem_req_hdr[71:64]);
    end
    if (rst_n && rx_valid && checking && exp_h.size() > 0) begin
      word_t q [$];
      int h; logic [7:0] k; bit ok;
      h = exp_h.pop_front(); k = exp_k.pop_front();
      lookup_addrs(h, k, q);
      ok = seen_a.size() >= q.size();
      for (int i = 0; i < q.size() && ok; i++) if (seen_a[i] != q[i]) ok = 0;
      foreach (seen_st[i]) if (seen_st[i] != 8'(rx_core)) ok = 0;
      chk(ok && rx_offloaded, $sformatf("packet h=%0d key=%0d: %0d reads, expected prefix of %0d",
                                        h, k, seen_a.size(), q.size()));
      pkts_checked++;
    end
    if (rst_n && rx_valid) begin seen_a.delete(); seen_st.delete(); end
  end

  task automatic send_pkt(input int h, input logic [7:0] k);
    pkt_valid = 1; pkt_args[0] = 64'(h); pkt_args[1] = 64'(k);
    @(posedge clk);
    while (!pkt_ready) @(posedge clk);
    @(negedge clk);
    pkt_valid = 0;
  endtask

  function automatic logic [7:0] pick_key(int h);
    int n, idx;
    if ($urandom_range(9) < 3) return key_of(NITEMS + int'($urandom_range(55)));
    n = 0;
    for (int i = h; i < NITEMS; i += NB) n++;
    idx = int'($urandom_range(n - 1));
    return key_of(h + idx * NB);
  endfunction

  // ---------------- watchdog ----------------
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- stimulus ----------------
  initial begin
    int epochs;
    cm_valid = 0; cm = '0; arg_valid = 0; arg_id = '0; arg_val = '0;
    pkt_valid = 0; pkt_args[0] = '0; pkt_args[1] = '0;
    mem_rsp_valid = 0; mem_rsp_data = '0;
    for (int i = 0; i < 15; i++) n_ev[i] = 0;
    for (int i = 0; i < 16; i++) r[i] = 64'(i) * 64'h1111;
    // memory image
    mem[PTRCELL] = TBASE;
    for (int b = 0; b < NB; b++) mem[TBASE + 64'(b) * 8] = (b < NITEMS) ? item(b) : 0;
    for (int i = 0; i < NITEMS; i++) begin
      mem[item(i) + 64'h10] = (i + NB < NITEMS) ? item(i + NB) : 0;
      mem[item(i) + 64'h30] = {24'h0, key_of(i), 32'h0};
      mem[item(i) + 64'h28] = {32'h0, 8'(i ^ 8'h5a), 24'h0};
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // Phase A: unrelated misses over 65 PCs (sets 12..15, 17 PCs in set 15)
    epochs = n_ev[7];
    while (n_ev[7] == epochs) begin
      for (int k = 0; k < 65; k++) begin
        word_t pc; int s;
        s  = 12 + ((k / 16 > 3) ? 3 : k / 16);
        pc = 64'h500000 + 64'(k % 16) * 16 + 64'(s);
        if (k == 64) pc = 64'h500100 + 64'hf;
        commit(pc, mk(OP_LOAD, 1, RAX, 1, RSP, 0, RAX, 32'(k * 8)), r[RSP], 0,
               64'(k) ^ 64'h77, 1, 0, 0);
      end
    end
    repeat (400) @(negedge clk);
    for (int i = 0; i < 3; i++) send_pkt(1, 8'd1);

    // Phase B: one epoch of lookups
    epochs = n_ev[7];
    while (n_ev[7] == epochs) begin
      int h;
      h = int'($urandom_range(NB - 1));
      cpu_lookup(h, pick_key(h));
    end
    repeat (600) @(negedge clk);
    seen_a.delete(); seen_st.delete();
    checking = 1;

    // Phase C: packet burst (fills the 16-entry scheduler)
    for (int p = 0; p < 60; p++) begin
      int h; logic [7:0] k;
      h = int'($urandom_range(NB - 1)); k = pick_key(h);
      exp_h.push_back(h); exp_k.push_back(k);
      send_pkt(h, k);
    end
    while (exp_h.size() > 0) @(negedge clk);
    repeat (20) @(negedge clk);

    chk(pkts_checked == 60, $sformatf("%0d of 60 packets finished", pkts_checked));
    for (int b = 0; b < 15; b++) begin
      $display("event %-14s %0d", ev_name[b], n_ev[b]);
      chk(n_ev[b] > 0, {"mechanism never exercised: ", ev_name[b]});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
