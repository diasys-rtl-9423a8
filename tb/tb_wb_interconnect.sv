// tb_wb_interconnect: self-checking testbench of the diagnosis processor bus.
//
// Two concurrent bus-master processes (index 0 plays the DMA, 1 the CPU)
// issue random classic Wishbone cycles. Slave 0 is a dp_ram; slave 1 is a
// testbench register slave that acknowledges after a random delay and
// returns a value derived from the address. Each master writes and reads
// back its own RAM region and checks every register read, so a wrong route
// or a cycle handed to the wrong master shows up as a data mismatch.
// Per-cycle checks: at most one slave sees a strobe and at most one master
// gets an ack. Both masters must be served. Inputs change 2 ns after the
// rising edge; acks are sampled on the falling edge. A watchdog ends a hang.
module tb_wb_interconnect;
  import diasys_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  wb_m2s_t [1:0] m_m2s, s_m2s;
  wb_s2m_t [1:0] m_s2m, s_s2m;
  int checks = 0, failures = 0;

  wb_interconnect dut (.clk, .rst_n, .m_m2s, .m_s2m, .s_m2s, .s_s2m);
  dp_ram #(.WORDS(1024)) u_ram (.clk, .rst_n, .wb_m2s(s_m2s[0]), .wb_s2m(s_s2m[0]));

  // register slave with random ack delay
  int dly;
  logic ack1;
  always @(posedge clk) begin
    if (s_m2s[1].cyc && s_m2s[1].stb && !ack1) begin
      if (dly == 0) begin ack1 <= 1; dly <= $urandom_range(3); end
      else dly <= dly - 1;
    end else ack1 <= 0;
  end
  assign s_s2m[1] = '{ack: ack1, dat: ~s_m2s[1].adr};

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(negedge clk) if (rst_n) begin
    chk(!(s_m2s[0].stb && s_m2s[1].stb), "both slaves strobed");
    chk(!(m_s2m[0].ack && m_s2m[1].ack), "both masters acknowledged");
  end

  task automatic access(input int m, input bit we, input logic [31:0] adr,
                        input logic [31:0] dat, output logic [31:0] rdat);
    #2;
    m_m2s[m] = '{cyc: 1'b1, stb: 1'b1, we: we, adr: adr, dat: dat, sel: 4'hF};
    forever begin @(negedge clk); if (m_s2m[m].ack) break; end
    rdat = m_s2m[m].dat;
    @(posedge clk); #2;
    m_m2s[m] = '0;
    repeat ($urandom_range(2)) @(posedge clk);
  endtask

  int done [2] = '{0, 0};
  int served [2] = '{0, 0};
  task automatic master(input int m);
    logic [31:0] shadow [16];
    logic [31:0] r, a;
    for (int i = 0; i < 16; i++) shadow[i] = 0;
    for (int i = 0; i < 16; i++) begin
      access(m, 1, (m * 64 + i) << 2, 32'(i) ^ 32'(m << 20), r);
      shadow[i] = 32'(i) ^ 32'(m << 20);
    end
    for (int i = 0; i < 200; i++) begin
      a = $urandom_range(15);
      case ($urandom_range(2))
        0: begin
          access(m, 0, (m * 64 + a) << 2, 0, r);
          chk(r == shadow[a], $sformatf("master %0d ram word %0d got %h exp %h", m, a, r, shadow[a]));
        end
        1: begin
          shadow[a] = $urandom;
          access(m, 1, (m * 64 + a) << 2, shadow[a], r);
        end
        default: begin
          access(m, 0, 32'h8000_0000 | (a << 2), 0, r);
          chk(r == ~(32'h8000_0000 | (a << 2)), $sformatf("master %0d register read %h", m, r));
        end
      endcase
      served[m]++;
    end
    done[m] = 1;
  endtask

  initial begin
    m_m2s = '0;
    ack1 = 0; dly = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    fork
      master(0);
      master(1);
    join
    chk(served[0] == 200 && served[1] == 200, "both masters served");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2ms;
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
