// hs_rx_tb - self-checking test of the four-phase bit-serial receiver.
//
// The testbench plays the sending node (req, data; waits for ack, drops req,
// waits for ack to fall, with random gaps). It checks the received words and the
// done pulse, that no ack is given while `enable` is low n_before a word starts,
// that a started word completes even when `enable` falls, and that ack follows
// req by one cycle.
module hs_rx_tb;
  localparam int N = 8;

  logic clk = 0, rst_n = 0;
  logic enable = 0, active, done, ch_req = 0, ch_data = 0, ch_ack;
  logic [N-1:0] word;
  int checks = 0, failures = 0;
  int done_cnt = 0;

  hs_rx #(.N(N)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (done) done_cnt++;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int gap = 0;

  task automatic send_bit(input logic b, output int ack_lat);
    @(negedge clk);
    ch_data = b; ch_req = 1;
    ack_lat = 0;
    while (!ch_ack) begin @(negedge clk); ack_lat++; end
    repeat ($urandom_range(gap)) @(negedge clk);
    ch_req = 0;
    while (ch_ack) @(negedge clk);
    repeat ($urandom_range(gap)) @(negedge clk);
  endtask

  task automatic send_word(input logic [N-1:0] w, input logic drop_enable);
    int lat;
    for (int i = N - 1; i >= 0; i--) begin
      send_bit(w[i], lat);
      if (i == N - 1 && drop_enable) enable = 0;
      if (gap == 0 && enable) check(lat == 1, $sformatf("ack one cycle after req (%0d)", lat));
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_before;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // not enabled: req is held, no ack
    @(negedge clk);
    ch_req = 1; ch_data = 1;
    repeat (10) @(negedge clk);
    check(!ch_ack && !active, "no ack while not enabled");
    // enabling lets the waiting bit through; finish that word (1,0,1,1,0,0,1,0)
    enable = 1;
    while (!ch_ack) @(negedge clk);
    ch_req = 0;
    while (ch_ack) @(negedge clk);
    n_before = done_cnt;
    for (int i = N - 2; i >= 0; i--) begin
      int lat;
      send_bit(i[0] ^ i[1], lat);
    end
    @(negedge clk);
    check(word == 8'hE6, $sformatf("held first bit joins its word: %h", word));
    check(done_cnt == n_before + 1, "held first bit joins its word");
    for (int i = 0; i < 20; i++) begin
      logic [N-1:0] w;
      w = N'($urandom);
      gap = (i < 5) ? 0 : 3;
      n_before = done_cnt;
      send_word(w, 1'b0);
      @(negedge clk);
      check(word == w, $sformatf("word %h received as %h", w, word));
      check(done_cnt == n_before + 1, "one done pulse per word");
      check(!active, "inactive between words");
    end
    // enable dropped after the first bit: the word still completes
    n_before = done_cnt;
    send_word(8'h3C, 1'b1);
    @(negedge clk);
    check(word == 8'h3C && done_cnt == n_before + 1, "started word completes without enable");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
