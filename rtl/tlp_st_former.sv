// tlp_st_former: builds the PCIe memory-read request header that the NIC
// sends for every memory access of an offloaded critical region.
//
// The paper fills the requested block into the right core's private cache by
// setting PCIe TLP Processing Hints with a Steering Tag in each request. The
// header layout below is the one of the PCIe 3.0 base specification:
//   DW0: Fmt (000 = 3-DW header, 001 = 4-DW header, no data), Type 00000
//        (memory read), TH = 1 (processing hints present), Length in DW.
//   DW1: Requester ID, Tag, and - for a read with TH set - the 8-bit
//        Steering Tag in the byte that otherwise holds the byte enables.
//   DW2/DW3: the address; its two lowest bits carry the Processing Hint.
// A 3-DW header is used for addresses below 4 GB, a 4-DW header otherwise.
// Requests are one aligned 64-byte cache block (Length = 16 DW); the address
// is aligned down to the block. Block size, requester ID and the hint value
// are this design's choices.
//
// Interface: purely combinational; hdr holds DW0 in bits 127:96, then DW1,
// DW2, DW3; hdr_4dw says whether DW3 is part of the header.
module tlp_st_former
  import cargo_pkg::*;
#(
  parameter logic [15:0] REQ_ID   = 16'h0100,
  parameter int unsigned LINE_DW  = 16,
  parameter logic [1:0]  PH       = 2'b00
) (
  input  word_t        addr,
  input  logic [7:0]   st,
  input  logic [7:0]   tag,
  output logic [127:0] hdr,
  output logic         hdr_4dw
);

  word_t       a;
  logic [31:0] dw0, dw1, dw2, dw3;

  always_comb begin
    a       = {addr[63:6], 6'b0};
    hdr_4dw = (a[63:32] != 32'h0);
    dw0        = '0;
    dw0[31:29] = hdr_4dw ? 3'b001 : 3'b000;
    dw0[28:24] = 5'b00000;
    dw0[16]    = 1'b1;                 // TH
    dw0[9:0]   = 10'(LINE_DW);
    dw1        = {REQ_ID, tag, st};
    if (hdr_4dw) begin
      dw2 = a[63:32];
      dw3 = {a[31:2], PH};
    end else begin
      dw2 = {a[31:2], PH};
      dw3 = '0;
    end
    hdr = {dw0, dw1, dw2, dw3};
  end

endmodule
