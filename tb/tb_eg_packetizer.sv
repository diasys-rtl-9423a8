// tb_eg_packetizer: self-checking test of the event packetizer.
//
// Offers random snapshots with 0..14 payload words and collects the flits,
// with random back-pressure on the NoC side. Checks header, source, event
// type, timestamp halves, payload halves (high first), the position of the
// last marker, and that without back-pressure a packet of n words takes
// exactly 5 + 2n cycles.
module tb_eg_packetizer;
  import diasys_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [ADDR_W-1:0] dest, src;
  snapshot_t snap;
  logic snap_valid, snap_ready, tx_valid, tx_ready;
  flit_t tx_flit;

  eg_packetizer dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    snap_valid = 0; tx_ready = 0; dest = 8'h01; src = 8'h04; snap = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int n = 0; n < 60; n++) begin
      logic [15:0] exp [$];
      int nw, got, cycles;
      bit stall;
      stall = (n % 2 == 1);
      nw = n % 15;
      snap = '0;
      snap.etype = 16'($urandom); snap.tstamp = $urandom; snap.nwords = 4'(nw);
      for (int k = 0; k < MAX_WORDS; k++) snap.words[k] = $urandom;
      exp = {hdr_flit(PKT_EVENT, dest), 16'(src), snap.etype, snap.tstamp[31:16], snap.tstamp[15:0]};
      for (int k = 0; k < nw; k++) begin
        exp.push_back(snap.words[k][31:16]);
        exp.push_back(snap.words[k][15:0]);
      end
      snap_valid = 1;
      got = 0; cycles = 0;
      while (1) begin
        tx_ready = stall ? 1'($urandom_range(0, 1)) : 1'b1;
        #1;
        cycles++;
        if (tx_valid && tx_ready) begin
          chk(tx_flit.data == exp[got], $sformatf("pkt %0d flit %0d %h exp %h", n, got, tx_flit.data, exp[got]));
          chk(tx_flit.last == (got == exp.size() - 1), $sformatf("pkt %0d flit %0d last", n, got));
          got++;
          if (tx_flit.last) begin
            chk(snap_ready, "snapshot accepted with last flit");
            @(posedge clk); #1;
            break;
          end
        end
        @(posedge clk); #1;
      end
      snap_valid = 0; tx_ready = 0;
      chk(got == exp.size(), "flit count");
      if (!stall) chk(cycles == 5 + 2 * nw, $sformatf("cycles %0d exp %0d", cycles, 5 + 2 * nw));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
