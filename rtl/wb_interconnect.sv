// wb_interconnect: Wishbone bus of the diagnosis processor.
//
// A shared bus with two masters (0: network adapter DMA, 1: CPU) and two
// slaves (0: RAM, 1: network adapter registers). When the bus is free, the
// requesting master after the previous winner gets it (round robin) and
// keeps it while it holds cyc; one idle cycle follows each released cycle
// frame. Address bit NA_BASE_BIT selects the register slave, all other
// addresses go to the RAM. The paper names a Wishbone bus; arbitration and
// address map are this design's choices.
// Assertions check that at most one slave is strobed and that masters hold
// a request until it is acknowledged.
module wb_interconnect
  import diasys_pkg::*;
#(
  parameter int unsigned NA_BASE_BIT = 31
) (
  input  logic          clk,
  input  logic          rst_n,
  input  wb_m2s_t [1:0] m_m2s,
  output wb_s2m_t [1:0] m_s2m,
  output wb_m2s_t [1:0] s_m2s,
  input  wb_s2m_t [1:0] s_s2m
);
  logic locked, owner, last_grant, sel, sel_valid, slv;

  always_comb begin
    if (locked) begin
      sel       = owner;
      sel_valid = 1'b1;
    end else if (m_m2s[!last_grant].cyc) begin
      sel       = !last_grant;
      sel_valid = 1'b1;
    end else begin
      sel       = last_grant;
      sel_valid = m_m2s[last_grant].cyc;
    end
  end

  assign slv = m_m2s[sel].adr[NA_BASE_BIT];

  always_comb begin
    s_m2s = '0;
    m_s2m = '0;
    if (sel_valid) begin
      s_m2s[slv]     = m_m2s[sel];
      m_s2m[sel]     = s_s2m[slv];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked     <= 1'b0;
      owner      <= 1'b0;
      last_grant <= 1'b1;
    end else begin
      locked <= sel_valid && m_m2s[sel].cyc;
      if (sel_valid && !locked) begin
        owner      <= sel;
        last_grant <= sel;
      end
    end
  end

  // bus rules: one slave per cycle frame; a master holds its request until acknowledged
  a_one_slave: assert property (@(posedge clk) disable iff (!rst_n)
    !(s_m2s[0].stb && s_m2s[1].stb));
  for (genvar m = 0; m < 2; m++) begin : g_hold
    a_hold: assert property (@(posedge clk) disable iff (!rst_n)
      m_m2s[m].stb && !m_s2m[m].ack |=> m_m2s[m].stb && $stable(m_m2s[m].adr));
  end
endmodule
