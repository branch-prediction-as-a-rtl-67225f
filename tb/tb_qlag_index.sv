// tb_qlag_index: compares the G-QLAg index with (PC xor GHR[15:0]) mod 43690
// computed in 64-bit integer arithmetic, for random and corner PCs and
// histories, and checks the index always lies inside the table.
module tb_qlag_index;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [63:0] pc;
  logic [61:0] ghr;
  logic [15:0] idx;
  int checks = 0, failures = 0;

  qlag_index dut (.pc, .ghr, .idx);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(longint unsigned p, logic [61:0] g);
    longint unsigned e;
    pc = p; ghr = g;
    #1;
    e = (p ^ longint'(g & 62'hFFFF)) % 64'd43690;
    checks++;
    if (idx != 16'(e) || idx >= 16'd43690) begin
      failures++;
      if (failures < 10) $display("FAIL pc=%h ghr=%h idx=%0d exp %0d", p, g, idx, e);
    end
  endtask

  initial begin
    chk(0, 0); chk(43689, 0); chk(43690, 0); chk(64'hFFFF_FFFF_FFFF_FFFF, '1);
    chk(65872, 62'h3_FFFF); chk(64'd43690 * 3 + 5, 62'h5);
    for (int i = 0; i < 20000; i++) chk({$urandom, $urandom}, {$urandom, $urandom});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
