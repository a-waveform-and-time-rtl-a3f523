// ddr3_buffer_ctrl -- DDR3 ring buffer between the event builder and SiTCP.
//
// Records leave the event builder much faster than Gigabit Ethernet can
// carry them in a burst, so they are parked in the external DDR3 memory and
// drained from there at the network's pace. This block packs the 32-bit
// record words four at a time into 128-bit memory words (first word in bits
// [31:0]), writes them to consecutive addresses of a ring that spans the
// memory, reads them back in order and feeds them byte by byte, each 32-bit
// word most significant byte first, to the SiTCP transmit port. A partly
// filled memory word is padded with zero filler words once the input has
// been idle for FLUSH_IDLE cycles. When the ring is full, in_ready falls and
// back-pressure reaches the channel FIFOs.
//
// Memory port: a simplified command interface standing in for the vendor
// DDR3 controller. A command (mem_write = 1 for write with mem_wdata, 0 for
// read) is taken when mem_cmd_valid and mem_ready are both high; read data
// return in order on mem_rd_valid, any number of cycles later. Writes take
// precedence over reads. At most RD_SLOTS reads are in flight or buffered.
// SiTCP port: tcp_tx_wr writes tcp_tx_data while tcp_tx_full is low.
// No command, input handshake or byte is issued while rst is high.
// The port shapes, the packing and the flush rule are this design's own.
module ddr3_buffer_ctrl #(
  parameter int unsigned MEM_ADDR_W = 24,   // 2^24 x 128 bit = 2 Gbit
  parameter int unsigned FLUSH_IDLE = 16,
  parameter int unsigned RD_SLOTS   = 4
) (
  input  logic                   clk,
  input  logic                   rst,
  // record stream in
  input  logic                   in_valid,
  input  logic [31:0]            in_data,
  output logic                   in_ready,
  // memory port
  output logic                   mem_cmd_valid,
  output logic                   mem_write,
  output logic [MEM_ADDR_W-1:0]  mem_addr,
  output logic [127:0]           mem_wdata,
  input  logic                   mem_ready,
  input  logic                   mem_rd_valid,
  input  logic [127:0]           mem_rd_data,
  // SiTCP transmit port
  output logic                   tcp_tx_wr,
  output logic [7:0]             tcp_tx_data,
  input  logic                   tcp_tx_full,
  // status
  output logic [MEM_ADDR_W:0]    level,        // memory words stored
  output logic                   ring_full
);
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned SLW = $clog2(RD_SLOTS + 1);

  // ---- packing ---------------------------------------------------------------
  logic [3:0][31:0] pack;
  logic [2:0]       pack_cnt;      // 0..4 words held
  logic [$clog2(FLUSH_IDLE+1)-1:0] idle;
  logic             wr_pending;

  assign wr_pending = (pack_cnt == 3'd4);
  assign in_ready   = !rst && !wr_pending;

  // ---- ring pointers -----------------------------------------------------------
  logic [MEM_ADDR_W:0] wr_ptr, rd_ptr;
  logic                do_write, do_read;
  logic [SLW-1:0]      in_flight;
  logic                rdf_empty, rdf_full, rdf_pop;
  logic [127:0]        rdf_data;
  logic [$clog2(RD_SLOTS):0] rdf_count;

  assign level     = wr_ptr - rd_ptr;
  assign ring_full = (level[MEM_ADDR_W] == 1'b1);
  assign do_write  = !rst && wr_pending && !ring_full && mem_ready;
  assign do_read   = !rst && !do_write && (level != '0) && mem_ready &&
                     ((SLW+1)'(in_flight) + (SLW+1)'(rdf_count) < (SLW+1)'(RD_SLOTS));

  assign mem_cmd_valid = do_write || do_read;
  assign mem_write     = do_write;
  assign mem_addr      = do_write ? wr_ptr[MEM_ADDR_W-1:0] : rd_ptr[MEM_ADDR_W-1:0];
  assign mem_wdata     = pack;

  always_ff @(posedge clk) begin
    if (rst) begin
      pack      <= '0;
      pack_cnt  <= '0;
      idle      <= '0;
      wr_ptr    <= '0;
      rd_ptr    <= '0;
      in_flight <= '0;
    end else begin
      if (do_write) begin
        pack_cnt <= '0;
        pack     <= '0;
        wr_ptr   <= wr_ptr + 1'b1;
      end else if (in_valid && in_ready) begin
        pack[pack_cnt[1:0]] <= in_data;
        pack_cnt <= pack_cnt + 1'b1;
        idle     <= '0;
      end else if (pack_cnt != '0 && !wr_pending) begin
        if (idle == ($bits(idle))'(FLUSH_IDLE - 1)) begin
          pack_cnt <= 3'd4;          // remaining words stay zero (filler)
          idle     <= '0;
        end else begin
          idle <= idle + 1'b1;
        end
      end
      if (do_read) rd_ptr <= rd_ptr + 1'b1;
      in_flight <= in_flight + SLW'(do_read) - SLW'(mem_rd_valid);
    end
  end

  sync_fifo #(.WIDTH(128), .DEPTH(RD_SLOTS)) u_rd_fifo (
    .clk, .rst, .push(mem_rd_valid), .wr_data(mem_rd_data), .pop(rdf_pop),
    .rd_data(rdf_data), .empty(rdf_empty), .full(rdf_full), .count(rdf_count));

  // ---- byte serializer ---------------------------------------------------------
  logic [3:0] byte_idx;
  logic [1:0] wsel, bsel;

  assign wsel        = byte_idx[3:2];
  assign bsel        = 2'd3 - byte_idx[1:0];
  assign tcp_tx_wr   = !rst && !rdf_empty && !tcp_tx_full;
  assign tcp_tx_data = rdf_data[{wsel, bsel, 3'b000} +: 8];
  assign rdf_pop     = tcp_tx_wr && (byte_idx == 4'd15);

  always_ff @(posedge clk) begin
    if (rst)            byte_idx <= '0;
    else if (tcp_tx_wr) byte_idx <= byte_idx + 1'b1;
  end

  a_rd_fifo_room: assert property (@(posedge clk) disable iff (rst) !(mem_rd_valid && rdf_full));
endmodule
