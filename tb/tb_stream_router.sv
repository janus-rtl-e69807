// tb_stream_router: sends worms with random masks and lengths (including
// empty ones and idle gaps inside a worm) and checks that each payload word
// appears once on the device bus, in order, with the worm's mask and correct
// first/last marks.
module tb_stream_router;
  import janus_pkg::*;
  logic clk = 0, rst_n = 1;   // pulsed low at start to trigger the asynchronous reset
  logic in_dv = 0;
  logic [15:0] in_data = '0, worms;
  dev_bus_t bus;
  int checks = 0, failures = 0, n_worms = 0;
  typedef struct { logic [7:0] mask; logic [15:0] data; logic first, last; } exp_t;
  exp_t q [$];

  stream_router dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && bus.dv) begin
    checks++;
    if (q.size() == 0) begin failures++; $display("unexpected word"); end
    else begin
      automatic exp_t e = q.pop_front();
      if (bus.devsel !== e.mask || bus.data !== e.data || bus.first !== e.first || bus.last !== e.last) begin
        failures++; $display("bus %h/%h/%b%b vs %h/%h/%b%b", bus.devsel, bus.data, bus.first, bus.last, e.mask, e.data, e.first, e.last);
      end
    end
  end

  task automatic put(logic [15:0] w);
    @(negedge clk); in_dv = 1; in_data = w;
    if ($urandom_range(3) == 0) begin @(negedge clk); in_dv = 0; end
  endtask

  initial begin
    #1 rst_n = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int w = 0; w < 60; w++) begin
      automatic logic [7:0] m = (w % 7 == 3) ? 8'h00 : 8'($urandom);
      automatic int len = (w % 9 == 4) ? 0 : $urandom_range(1, 12);
      put({8'h00, m}); put(16'(len));
      if (len != 0 && m != 0) n_worms++;
      for (int i = 0; i < len; i++) begin
        automatic logic [15:0] d = 16'($urandom);
        if (m != 0) q.push_back('{m, d, i == 0, i == len-1});
        put(d);
      end
    end
    @(negedge clk); in_dv = 0;
    repeat (4) @(negedge clk);
    checks += 2;
    if (q.size() != 0) begin failures++; $display("%0d words missing", q.size()); end
    if (worms != 16'(n_worms)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
