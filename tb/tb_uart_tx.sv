// tb_uart_tx: checks the serial frames of uart_tx bit by bit.
// Sends random 8-bit words back to back and decodes the line in the
// testbench: start bit low for 4 clocks, 8 data bits of 4 clocks LSB first,
// stop bit high for 2 clocks; so a byte takes 38 clocks, 8.42 Mbit/s at 40 MHz.
module tb_uart_tx;
  logic clk = 0, rst = 1;
  logic [7:0] data;
  logic valid, ready, txd;
  int checks = 0, failures = 0;
  always #12.5 clk = ~clk;

  uart_tx #(.CLKS_PER_BIT(4), .STOP_CLKS(2), .DATA_BITS(8)) dut (.*);

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  localparam int N = 40;
  logic [7:0] sent [N];
  int nsent = 0;

  // driver: keeps valid high so frames run back to back
  initial begin
    valid = 0; data = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int i = 0; i < N; i++) begin
      sent[i] = 8'($urandom);
      data  <= sent[i];
      valid <= 1;
      do @(posedge clk); while (!ready);
      nsent++;
    end
    valid <= 0;
  end

  // line decoder: expects exactly the frame layout
  initial begin
    int t_first, t_last;
    logic [7:0] b;
    @(negedge rst);
    for (int i = 0; i < N; i++) begin
      @(negedge txd);
      if (i == 0) t_first = $time;
      if (i == N - 1) t_last = $time;
      for (int c = 0; c < 4; c++) begin #1; chk(txd == 0, "start bit"); @(posedge clk); end
      for (int k = 0; k < 8; k++) begin
        for (int c = 0; c < 4; c++) begin
          #1;
          if (c == 0) b[k] = txd;
          chk(txd == b[k], "stable data bit");
          @(posedge clk);
        end
      end
      chk(b == sent[i], $sformatf("byte %0d: got %02h want %02h", i, b, sent[i]));
      #1; chk(txd == 1, "stop bit");
    end
    // 38 clocks (25 ns) per byte when sent back to back
    chk((t_last - t_first) == (N - 1) * 38 * 25, $sformatf("frame period %0d ns", (t_last - t_first) / (N - 1)));
    repeat (20) @(posedge clk);
    chk(txd == 1, "idle high");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
