// dma_fifo_tb: random valid/ready traffic through a small FIFO, compared with a
// queue model; checks ordering, that no word is lost or duplicated, that in_ready
// falls exactly when DEPTH words are held, and one-word-per-cycle throughput when
// both sides are always ready.
module dma_fifo_tb;
  localparam int W = 24, D = 16;
  logic clk = 0, rst_n = 0;
  always #12.5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data = '0, out_data;
  logic [$clog2(D+1)-1:0] count;
  logic [W-1:0] q [$];

  dma_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data,
                                        .out_valid, .out_ready, .out_data, .count);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one cycle: drive at negedge, observe handshakes at posedge
  task automatic cyc(input int p_in, input int p_out);
    @(negedge clk);
    in_valid  = ($urandom_range(0, 99) < p_in);
    in_data   = W'($urandom);
    out_ready = ($urandom_range(0, 99) < p_out);
    #1;
    check(in_ready == (q.size() < D), $sformatf("in_ready=%0d size=%0d", in_ready, q.size()));
    check(out_valid == (q.size() > 0), "out_valid vs model");
    check(count == q.size(), $sformatf("count %0d model %0d", count, q.size()));
    if (out_valid && q.size() > 0) check(out_data == q[0], $sformatf("data %h exp %h", out_data, q[0]));
    @(posedge clk);
    if (out_valid && out_ready) void'(q.pop_front());
    if (in_valid && in_ready) q.push_back(in_data);
  endtask

  initial begin
    int moved;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) cyc(70, 30);   // fills up
    for (int i = 0; i < 3000; i++) cyc(30, 70);   // drains
    for (int i = 0; i < 3000; i++) cyc(50, 50);
    // throughput: both sides always ready
    while (q.size() > 0) cyc(0, 100);
    moved = 0;
    for (int i = 0; i < 200; i++) begin
      cyc(100, 100);
      if (i > 0) moved++;
    end
    check(q.size() == 1, $sformatf("streaming: %0d words held, expected 1", q.size()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
