// async_fifo: dual-clock first-word-fall-through FIFO.
//
// This is the FIFO every user module talks to. It separates the clock of the
// PCIe core's transaction interface from the user clock, and it reports how
// many words it holds so that both sides can work on whole packets: a writer
// may wait until wr_data_count leaves room for a full packet, a reader until
// rd_data_count covers a full packet. It also gives the per-operation
// success flags wr_ack and valid. All of this follows the paper's list of what
// a vendor FIFO core offers; the circuit below is a plain reimplementation.
//
// How it works: binary read and write pointers with one extra wrap bit are
// kept in their own clock domains and passed to the other domain in Gray code
// through two flip-flop synchronisers. The memory is an array with a
// registered write and an asynchronous read, so the word at the head is on
// dout whenever empty is low (first-word fall-through).
//
// Timing: a write is seen by the reader three rd_clk edges later at most, a
// read frees space for the writer three wr_clk edges later at most. The counts
// on each side are exact for that side's own operations and lag the other
// side's, so they are always safe (never over-report data or free space).
// A write to a full FIFO or a read of an empty one is ignored and flagged with
// overflow / underflow. wr_rst_n and rd_rst_n are expected to be asserted
// together.
module async_fifo #(
  parameter int unsigned DATA_W = 67,
  parameter int unsigned ADDR_W = 9           // depth = 2**ADDR_W words
) (
  // write side
  input  logic              wr_clk,
  input  logic              wr_rst_n,
  input  logic              wr_en,
  input  logic [DATA_W-1:0] din,
  output logic              full,
  output logic              wr_ack,
  output logic              overflow,
  output logic [ADDR_W:0]   wr_data_count,
  // read side
  input  logic              rd_clk,
  input  logic              rd_rst_n,
  input  logic              rd_en,
  output logic [DATA_W-1:0] dout,
  output logic              empty,
  output logic              valid,
  output logic              underflow,
  output logic [ADDR_W:0]   rd_data_count
);

  localparam int unsigned DEPTH = 2 ** ADDR_W;

  logic [DATA_W-1:0] mem [DEPTH];

  logic [ADDR_W:0] wptr, rptr;           // binary, own domain
  logic [ADDR_W:0] wptr_g, rptr_g;       // gray, own domain
  logic [ADDR_W:0] rptr_g_s1, rptr_g_s2; // read pointer in write domain
  logic [ADDR_W:0] wptr_g_s1, wptr_g_s2; // write pointer in read domain
  logic [ADDR_W:0] rptr_w, wptr_r;       // binary after synchronisation

  function automatic logic [ADDR_W:0] bin2gray(input logic [ADDR_W:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [ADDR_W:0] gray2bin(input logic [ADDR_W:0] g);
    logic [ADDR_W:0] b;
    b[ADDR_W] = g[ADDR_W];
    for (int i = int'(ADDR_W) - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // ---------------- write domain ----------------
  logic do_wr;
  assign rptr_w        = gray2bin(rptr_g_s2);
  assign wr_data_count = wptr - rptr_w;
  assign full          = wr_data_count == (ADDR_W+1)'(DEPTH);
  assign do_wr         = wr_en && !full;

  always_ff @(posedge wr_clk) begin
    if (do_wr) mem[wptr[ADDR_W-1:0]] <= din;
  end

  always_ff @(posedge wr_clk or negedge wr_rst_n) begin
    if (!wr_rst_n) begin
      wptr      <= '0;
      wptr_g    <= '0;
      rptr_g_s1 <= '0;
      rptr_g_s2 <= '0;
      wr_ack    <= 1'b0;
      overflow  <= 1'b0;
    end else begin
      rptr_g_s1 <= rptr_g;
      rptr_g_s2 <= rptr_g_s1;
      wr_ack    <= do_wr;
      overflow  <= wr_en && full;
      if (do_wr) begin
        wptr   <= wptr + 1'b1;
        wptr_g <= bin2gray(wptr + 1'b1);
      end
    end
  end

  // ---------------- read domain ----------------
  logic do_rd;
  assign wptr_r        = gray2bin(wptr_g_s2);
  assign rd_data_count = wptr_r - rptr;
  assign empty         = rd_data_count == '0;
  assign valid         = !empty;
  assign do_rd         = rd_en && !empty;
  assign dout          = mem[rptr[ADDR_W-1:0]];

  always_ff @(posedge rd_clk or negedge rd_rst_n) begin
    if (!rd_rst_n) begin
      rptr      <= '0;
      rptr_g    <= '0;
      wptr_g_s1 <= '0;
      wptr_g_s2 <= '0;
      underflow <= 1'b0;
    end else begin
      wptr_g_s1 <= wptr_g;
      wptr_g_s2 <= wptr_g_s1;
      underflow <= rd_en && empty;
      if (do_rd) begin
        rptr   <= rptr + 1'b1;
        rptr_g <= bin2gray(rptr + 1'b1);
      end
    end
  end

  // A count can never exceed the depth.
  a_wr_count: assert property (@(posedge wr_clk) disable iff (!wr_rst_n)
                               wr_data_count <= (ADDR_W+1)'(DEPTH));
  a_rd_count: assert property (@(posedge rd_clk) disable iff (!rd_rst_n)
                               rd_data_count <= (ADDR_W+1)'(DEPTH));

endmodule
