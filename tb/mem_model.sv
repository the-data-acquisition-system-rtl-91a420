// mem_model: behavioural model of one Lv2 event memory (a 2-Gbit part in
// the real system). Synchronous write; read data appear in the clock after
// the read request. Storage is sparse, so the full 2^23-word address space
// costs only the words actually written; unwritten words read as zero.
module mem_model #(
  parameter int unsigned AW = 23,
  parameter int unsigned W  = 256
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [longint unsigned];
  initial rdata = '0;
  always @(posedge clk) begin
    if (we) mem[longint'(waddr)] = wdata;
    if (re) rdata <= mem.exists(longint'(raddr)) ? mem[longint'(raddr)] : '0;
  end
endmodule
