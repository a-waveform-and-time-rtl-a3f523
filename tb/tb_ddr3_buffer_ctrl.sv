// tb_ddr3_buffer_ctrl -- checks the DDR3 ring buffer and SiTCP byte stream.
// Words sent in must leave the SiTCP port as bytes, most significant byte
// of each word first, in order, with zero filler words only where a partly
// filled memory word was flushed after the input went idle. A small ring
// (8 memory words) and a long SiTCP stall make the ring fill, which must
// stop the input (in_ready low) without losing or reordering data.
module tb_ddr3_buffer_ctrl;
  timeunit 1ns; timeprecision 1ps;
  localparam int AW = 3;
  logic clk = 0, rst = 1;
  logic in_valid = 0, in_ready;
  logic [31:0] in_data = '0;
  logic mem_cmd_valid, mem_write, mem_ready, mem_rd_valid;
  logic [AW-1:0] mem_addr;
  logic [127:0] mem_wdata, mem_rd_data;
  logic tcp_tx_wr, tcp_tx_full = 0;
  logic [7:0] tcp_tx_data;
  logic [AW:0] level;
  logic ring_full;
  int checks = 0, failures = 0, n_full_cycles = 0, n_filler = 0;
  logic [31:0] sent[$];
  logic [7:0] bytes[$];

  ddr3_buffer_ctrl #(.MEM_ADDR_W(AW), .FLUSH_IDLE(16), .RD_SLOTS(4)) dut (.*);
  ddr3_mem_model #(.ADDR_W(AW)) mem (
    .clk, .cmd_valid(mem_cmd_valid), .write(mem_write), .addr(mem_addr),
    .wdata(mem_wdata), .ready(mem_ready), .rd_valid(mem_rd_valid), .rd_data(mem_rd_data));

  always #2 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  always @(posedge clk) begin
    if (tcp_tx_wr && !rst) bytes.push_back(tcp_tx_data);
    if (ring_full) n_full_cycles++;
  end

  // send n nonzero words, valid toggling at random
  task automatic send(int n);
    int k = 0;
    while (k < n) begin
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      in_data  = $urandom | 32'h1;
      @(posedge clk);
      if (in_valid && in_ready) begin sent.push_back(in_data); k++; end
    end
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic compare();
    int wi = 0;
    check(bytes.size() % 16 == 0, "whole memory words sent");
    while (bytes.size() >= 4) begin
      logic [31:0] w;
      w = {bytes[0], bytes[1], bytes[2], bytes[3]};
      repeat (4) void'(bytes.pop_front());
      if (w == 32'h0) n_filler++;
      else begin
        check(sent.size() > 0 && w == sent[0], $sformatf("word %0d: %h vs %h", wi, w, sent.size() ? sent[0] : 0));
        if (sent.size() > 0) void'(sent.pop_front());
      end
      wi++;
    end
    check(sent.size() == 0, $sformatf("%0d words missing", sent.size()));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    send(101);                     // 101 = 25 memory words + 1 word to flush
    repeat (400) @(posedge clk);
    compare();
    check(n_filler == 3, $sformatf("filler words %0d, expected 3", n_filler));
    // stall SiTCP: the 8-word ring fills and stops the input
    tcp_tx_full = 1;
    fork
      send(200);
      begin
        repeat (600) @(posedge clk);
        check(ring_full && !in_ready, "ring full stops the input");
        tcp_tx_full = 0;
      end
    join
    repeat (2000) @(posedge clk);
    n_filler = 0;
    compare();
    check(n_full_cycles > 0, "ring reached full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
