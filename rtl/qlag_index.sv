// qlag_index: G-QLAg table index, gshare style: the branch PC XORed with the
// newest HIST bits of the global history, taken modulo the number of table
// entries. The modulo lets the table hold exactly the 43690 entries that a
// 64 KB budget at 12 bits per entry gives. The paper names the hash and the
// modulo; XOR without a PC shift is this design's choice. Combinational.
module qlag_index #(
  parameter int unsigned PC_W    = 64,
  parameter int unsigned GHR_LEN = 62,
  parameter int unsigned HIST    = 16,
  parameter int unsigned ENTRIES = 43690,
  parameter int unsigned IDX_W   = $clog2(ENTRIES)
) (
  input  logic [PC_W-1:0]    pc,
  input  logic [GHR_LEN-1:0] ghr,
  output logic [IDX_W-1:0]   idx
);
  logic [PC_W-1:0] hash;

  always_comb begin
    hash = pc ^ PC_W'(ghr[HIST-1:0]);
    idx  = IDX_W'(hash % PC_W'(ENTRIES));
  end
endmodule
