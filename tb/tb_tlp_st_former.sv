// tb_tlp_st_former: checks the PCIe memory-read header with TLP processing
// hints: format, type, TH bit, length, requester ID, tag, steering tag in
// byte 7 and the block-aligned address, for 3-DW and 4-DW headers. Expected
// headers are assembled field by field here from the PCIe layout.
module tb_tlp_st_former;
  import cargo_pkg::*;
  int checks = 0, failures = 0;
  word_t addr;
  logic [7:0] st, tag;
  logic [127:0] hdr;
  logic h4;
  tlp_st_former dut (.addr, .st, .tag, .hdr, .hdr_4dw(h4));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 200; i++) begin
      logic [31:0] e0, e1, e2, e3;
      word_t al;
      addr = {$urandom, $urandom};
      if (i % 2 == 0) addr[63:32] = '0;
      st = 8'($urandom); tag = 8'($urandom);
      #1;
      al = addr & ~64'h3f;
      e0 = {(al[63:32] != 0) ? 3'b001 : 3'b000, 5'b00000, 7'b0, 1'b1, 6'b0, 10'd16};
      e1 = {16'h0100, tag, st};
      if (al[63:32] != 0) begin e2 = al[63:32]; e3 = al[31:0]; end
      else begin e2 = al[31:0]; e3 = '0; end
      checks++;
      if (hdr !== {e0, e1, e2, e3} || h4 !== (al[63:32] != 0)) begin
        failures++;
        $display("FAIL addr=%h hdr=%h exp=%h", addr, hdr, {e0, e1, e2, e3});
      end
    end
    // one hand-written header: address 0x0000_0001_2345_6780, ST 3, tag 7
    addr = 64'h0000_0001_2345_6789; st = 8'd3; tag = 8'd7; #1;
    checks++;
    if (hdr !== 128'h2001_0010_0100_0703_0000_0001_2345_6780) begin
      failures++; $display("FAIL fixed header %h", hdr);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
