// tb_uart_rx: drives frames with a half-length stop bit (38 clocks per byte,
// back to back) into uart_rx and checks every byte, plus one frame with a
// low stop bit that must raise frame_err instead of valid.
module tb_uart_rx;
  logic clk = 0, rst = 1;
  logic rxd = 1;
  logic [7:0] data;
  logic valid, frame_err;
  int checks = 0, failures = 0;
  always #12.5 clk = ~clk;

  uart_rx #(.CLKS_PER_BIT(4), .DATA_BITS(8)) dut (.*);

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  localparam int N = 50;
  logic [7:0] q[$];
  int nerr = 0;

  task automatic send(input logic [7:0] b, input bit good_stop);
    rxd <= 0; repeat (4) @(posedge clk);
    for (int k = 0; k < 8; k++) begin rxd <= b[k]; repeat (4) @(posedge clk); end
    rxd <= good_stop; repeat (2) @(posedge clk);
  endtask

  initial begin
    repeat (4) @(posedge clk);
    rst <= 0;
    repeat (4) @(posedge clk);
    for (int i = 0; i < N; i++) begin
      logic [7:0] b;
      b = 8'($urandom);
      q.push_back(b);
      send(b, 1);
    end
    rxd <= 1; repeat (10) @(posedge clk);
    send(8'h55, 0);
    rxd <= 1; repeat (10) @(posedge clk);
    chk(q.size() == 0, $sformatf("%0d bytes not received", q.size()));
    chk(nerr == 1, "one framing error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (valid && !rst) begin
      if (q.size() == 0) chk(0, $sformatf("unexpected byte %02h at %0t", data, $time));
      else begin
        logic [7:0] e;
        e = q.pop_front();
        chk(data == e, $sformatf("got %02h want %02h", data, e));
      end
    end
    if (frame_err) begin nerr++; $display("ferr at %0t", $time); end
  end

  initial begin
    #1ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
