// tb_dp_ram: self-checking testbench of the diagnosis processor RAM.
//
// Drives the Wishbone slave port with single classic cycles (inputs change
// 2 ns after a rising edge, ack is sampled on the falling edge) and compares
// every read against a shadow model: random full-word and byte-select writes
// over the whole WORDS range, read-back of written and unwritten words, a
// read beyond the last word (must return 0 and be acknowledged) and the
// one-cycle ack latency. Uses the paper's 7680-word (30 kB) size.
// A watchdog ends the run with a failure if the bus hangs.
module tb_dp_ram;
  import diasys_pkg::*;
  localparam int unsigned WORDS = 7680;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  wb_m2s_t m2s;
  wb_s2m_t s2m;
  int checks = 0, failures = 0;

  dp_ram #(.WORDS(WORDS)) dut (.clk, .rst_n, .wb_m2s(m2s), .wb_s2m(s2m));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int lat;
  task automatic access(input bit we, input logic [31:0] adr, input logic [31:0] dat,
                        input logic [3:0] sel, output logic [31:0] rdat);
    #2;
    m2s = '{cyc: 1'b1, stb: 1'b1, we: we, adr: adr, dat: dat, sel: sel};
    lat = 0;
    forever begin @(negedge clk); lat++; if (s2m.ack) break; end
    rdat = s2m.dat;
    @(posedge clk); #2;
    m2s = '0;
    @(posedge clk);
  endtask

  logic [31:0] shadow [int];
  initial begin
    logic [31:0] r, a, d;
    logic [3:0] sel;
    m2s = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < 300; i++) begin
      a = $urandom_range(WORDS - 1);
      d = $urandom;
      sel = (i % 3 == 0) ? 4'(($urandom % 15) + 1) : 4'hF;
      if (!shadow.exists(a)) begin
        access(1, a << 2, 32'hFFFF_FFFF, 4'hF, r);  // known initial value
        shadow[a] = 32'hFFFF_FFFF;
      end
      access(1, a << 2, d, sel, r);
      for (int b = 0; b < 4; b++) if (sel[b]) shadow[a][8*b +: 8] = d[8*b +: 8];
      chk(lat == 2, $sformatf("write ack latency %0d", lat));
    end
    foreach (shadow[k]) begin
      access(0, k << 2, 0, 4'hF, r);
      chk(r == shadow[k], $sformatf("word %0d read %h exp %h", k, r, shadow[k]));
    end
    access(1, (WORDS - 1) << 2, 32'h1234_5678, 4'hF, r);
    access(0, (WORDS - 1) << 2, 0, 4'hF, r);
    chk(r == 32'h1234_5678, "last word");
    access(0, WORDS << 2, 0, 4'hF, r);
    chk(r == 32'h0, "read beyond the memory returns 0");
    chk(lat == 2, "out-of-range access acknowledged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
