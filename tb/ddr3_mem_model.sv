// ddr3_mem_model -- behavioural stand-in for the DDR3 memory and its
// controller, as seen through the buffer's simplified command port.
// Not synthesizable. Commands are accepted when ready is high (ready drops
// at random to imitate refresh and bank conflicts); read data come back in
// order after a random latency of LAT_MIN..LAT_MAX cycles. Storage is an
// associative array, so the full 2^24-word address space costs nothing.
module ddr3_mem_model #(
  parameter int unsigned ADDR_W  = 24,
  parameter int unsigned LAT_MIN = 8,
  parameter int unsigned LAT_MAX = 20,
  parameter int unsigned BUSY_PCT = 20
) (
  input  logic              clk,
  input  logic              cmd_valid,
  input  logic              write,
  input  logic [ADDR_W-1:0] addr,
  input  logic [127:0]      wdata,
  output logic              ready,
  output logic              rd_valid,
  output logic [127:0]      rd_data
);
  timeunit 1ns; timeprecision 1ps;
  logic [127:0] mem [longint];
  typedef struct { longint due; logic [127:0] d; } rd_t;
  rd_t pend[$];
  longint cyc = 0;
  int unsigned n_wr = 0, n_rd = 0;

  initial begin ready = 1; rd_valid = 0; rd_data = '0; end

  always @(posedge clk) begin
    cyc++;
    rd_valid <= 0;
    if (pend.size() > 0 && pend[0].due <= cyc) begin
      rd_t r;
      r = pend.pop_front();
      rd_valid <= 1;
      rd_data  <= r.d;
    end
    if (cmd_valid && ready) begin
      if (write) begin
        mem[longint'(addr)] = wdata;
        n_wr++;
      end else begin
        rd_t r;
        longint due;
        int unsigned lat;
        lat = LAT_MIN + $urandom % (LAT_MAX - LAT_MIN + 1);
        due = cyc + longint'(lat);
        if (pend.size() > 0 && due <= pend[$].due) due = pend[$].due + 1;
        r.due = due;
        r.d   = mem.exists(longint'(addr)) ? mem[longint'(addr)] : '0;
        pend.push_back(r);
        n_rd++;
      end
    end
    ready <= ($urandom % 100) >= BUSY_PCT;
  end
endmodule
