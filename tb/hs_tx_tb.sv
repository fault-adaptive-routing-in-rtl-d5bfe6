// hs_tx_tb - self-checking test of the four-phase bit-serial transmitter.
//
// The testbench plays the receiving node: it acknowledges each req after a
// random delay (0..3 cycles) and releases ack after req falls, collecting the
// bits. It checks the received words, the done pulse, that req never rises
// while ack is still high, and the cost of four cycles per bit with a receiver
// that answers at once.
module hs_tx_tb;
  localparam int N = 8;

  logic clk = 0, rst_n = 0;
  logic start = 0, busy, done, ch_req, ch_data, ch_ack = 0;
  logic [N-1:0] word = '0;
  int checks = 0, failures = 0;

  hs_tx #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int max_delay = 0;
  logic [N-1:0] rxw;
  int nbits = 0;

  // receiver model
  initial begin
    forever begin
      @(posedge clk);
      if (ch_req && !ch_ack) begin
        repeat ($urandom_range(max_delay)) @(posedge clk);
        rxw = {rxw[N-2:0], ch_data};
        nbits++;
        ch_ack <= 1'b1;
        @(posedge clk);
        while (ch_req) @(posedge clk);
        repeat ($urandom_range(max_delay)) @(posedge clk);
        ch_ack <= 1'b0;
      end
    end
  end

  // protocol monitor: req only rises when ack is low
  always @(posedge clk) if (rst_n && ch_req && !$past(ch_req)) begin
    checks++;
    if ($past(ch_ack)) begin failures++; $display("FAIL: req rose with ack high"); end
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input logic [N-1:0] w, output int cycles);
    int c;
    @(negedge clk);
    word = w; start = 1;
    nbits = 0;
    @(negedge clk);
    start = 0;
    check(busy, "busy after start");
    c = 1;
    while (!done) begin @(negedge clk); c++; end
    cycles = c;
    @(negedge clk);
    check(!busy, "idle after done");
  endtask

  initial begin
    int cyc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    check(!ch_req && !busy, "idle after reset");
    // immediate receiver: exactly 4 cycles per bit
    max_delay = 0;
    send(8'hA5, cyc);
    check(rxw == 8'hA5 && nbits == N, $sformatf("word A5 received as %h (%0d bits)", rxw, nbits));
    check(cyc - 1 == 4 * N, $sformatf("4 cycles per bit: done %0d cycles after start for %0d bits", cyc - 1, N));
    // slow, random receiver
    max_delay = 3;
    for (int i = 0; i < 20; i++) begin
      logic [N-1:0] w;
      w = N'($urandom);
      send(w, cyc);
      check(rxw == w && nbits == N, $sformatf("word %h received as %h", w, rxw));
      check(cyc >= 4 * N, "never faster than the handshake allows");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
