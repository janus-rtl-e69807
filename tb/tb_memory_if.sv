// tb_memory_if: drives the device bus directly with write and read worms for
// device IDs 0 and 3 (and worms for other devices that must be ignored),
// with a staging memory attached, and checks the returned words under random
// back-pressure.
module tb_memory_if;
  import janus_pkg::*;
  localparam int unsigned AW = 10;
  logic clk = 0, rst_n = 1;   // pulsed low at start to trigger the asynchronous reset
  dev_bus_t bus;
  logic m_en, m_we, out_valid, out_ready;
  logic [AW-1:0] m_addr;
  logic [15:0] m_wdata, m_rdata, out_data;
  logic [15:0] shadow [2**AW];
  logic [15:0] rx_q [$];
  int checks = 0, failures = 0;

  memory_if #(.AW(AW)) dut (.*);
  staging_mem #(.AW(AW)) u_mem (.clk, .en(m_en), .we(m_we), .addr(m_addr), .wdata(m_wdata), .rdata(m_rdata));
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (out_valid && out_ready) rx_q.push_back(out_data);
    out_ready <= ($urandom_range(2) != 0);
  end

  task automatic worm(logic [7:0] mask, logic [15:0] w [$]);
    for (int i = 0; i < w.size(); i++) begin
      @(negedge clk);
      bus.devsel = mask; bus.dv = 1; bus.data = w[i];
      bus.first = (i == 0); bus.last = (i == w.size()-1);
    end
    @(negedge clk); bus = '0;
  endtask

  initial begin
    bus = '0;
    #1 rst_n = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 30; n++) begin
      automatic logic [15:0] w [$];
      automatic int a = $urandom_range(2**AW - 20), len = $urandom_range(1, 16);
      automatic logic [7:0] mask = (n % 2) ? 8'h01 : 8'h08;
      // write worm
      w = {16'h0000, 16'(a)};
      for (int i = 0; i < len; i++) begin
        automatic logic [15:0] d = 16'($urandom);
        w.push_back(d); shadow[a+i] = d;
      end
      worm(mask, w);
      // a worm for another device with the same format must be ignored
      w = {16'h0000, 16'(a), 16'hBAD0};
      worm(8'h10, w);
      // read worm
      w = {16'h8000, 16'(a), 16'(len)};
      worm(mask, w);
      for (int g = 0; g < 200 && rx_q.size() < len; g++) @(negedge clk);
      for (int i = 0; i < len; i++) begin
        checks++;
        if (rx_q.size() == 0 || rx_q.pop_front() !== shadow[a+i]) failures++;
      end
    end
    repeat (10) @(negedge clk);
    checks++;
    if (rx_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
