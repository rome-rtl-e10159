// tb_rome_addr_map: checks the address map on fixed and random addresses
// against the formula chunk = addr / 4096, channel = chunk mod 36,
// q = chunk / 36, vba = q mod 8, sid = (q / 8) mod 4, row = q / 32.
`timescale 1ns/100ps
module tb_rome_addr_map;
  import rome_pkg::*;
  logic [35:0] addr; logic [5:0] ch; logic [1:0] sid; logic [2:0] vba; logic [12:0] row;
  logic aligned, in_range;
  rome_addr_map dut (.addr_i(addr), .ch_o(ch), .sid_o(sid), .vba_o(vba), .row_o(row),
                     .aligned_o(aligned), .in_range_o(in_range));
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask
  task automatic try(input longint a);
    longint chunk = a / 4096, q;
    q = chunk / 36;
    addr = 36'(a); #1;
    check(int'(ch) == int'(chunk % 36), $sformatf("ch for %h: %0d", a, ch));
    check(int'(vba) == int'(q % 8), "vba");
    check(int'(sid) == int'((q / 8) % 4), "sid");
    check(int'(row) == int'((q / 32) % 8192), "row");
    check(aligned == ((a % 4096) == 0), "aligned");
    check(in_range == (q < 32 * 8192), "in range");
  endtask
  initial begin
    try(0); try(4096); try(35 * 4096); try(36 * 4096); try(36 * 8 * 4096); try(36 * 32 * 4096 + 64);
    try(longint'(36) * 32 * 8192 * 4096 - 4096);   // last chunk of the cube
    try(longint'(36) * 32 * 8192 * 4096);          // first beyond it
    for (int i = 0; i < 2000; i++) try({$urandom, $urandom} % (longint'(1) << 36));
    // a run of consecutive chunks visits every channel before reusing one
    begin
      bit seen [36];
      for (int i = 0; i < 36; i++) seen[i] = 0;
      for (int i = 0; i < 36; i++) begin addr = 36'(i * 4096 + 36 * 4096 * 5); #1; seen[ch] = 1; end
      for (int i = 0; i < 36; i++) check(seen[i], "all channels in a run of 36");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
