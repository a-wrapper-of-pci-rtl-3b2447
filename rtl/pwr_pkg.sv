// pwr_pkg: types and helpers shared by the PCIe FIFO wrapper.
//
// The wrapper moves transaction layer packets (TLPs) between the 64-bit
// transaction (TRN) interface of a PCIe endpoint core and user FIFOs. Every
// FIFO word carries one 64-bit quad word (QW) of a TLP together with two
// marker bits, start of packet and end of packet, so that a corrupted length
// field can only damage the packet it belongs to (the packet boundaries are
// still visible). A third bit records that only the upper double word (DW) of
// the last QW is valid, the information the core gives on trn_rrem_n /
// trn_trem_n. The start/end markers follow the paper; the half-QW bit and the
// exact packing are this design's choice.
//
// On the 64-bit TRN interface the first DW of a QW is in bits [63:32]. A TLP
// header starts with DW0 = {R, fmt[1:0], type[4:0], ..., length[9:0]}.
package pwr_pkg;

  localparam int unsigned QW_W = 64;

  typedef struct packed {
    logic            sof;   // first QW of a TLP
    logic            eof;   // last QW of a TLP
    logic            half;  // with eof: only bits [63:32] carry data
    logic [QW_W-1:0] data;
  } fifo_word_t;

  localparam int unsigned FIFO_W = $bits(fifo_word_t);  // 67

  // TLP classes used by the scheduler for the core's buffer-available flags.
  typedef enum logic [1:0] {
    CLS_NONPOSTED = 2'd0,
    CLS_POSTED    = 2'd1,
    CLS_CPL       = 2'd2
  } tlp_class_e;

  // Header DW0 fields.
  function automatic logic has_data(input logic [31:0] dw0);
    return dw0[30];
  endfunction

  function automatic logic hdr_4dw(input logic [31:0] dw0);
    return dw0[29];
  endfunction

  function automatic logic is_mem_req(input logic [31:0] dw0);
    // MRd, MRdLk, MWr (type 0000x)
    return dw0[28:25] == 4'b0000;
  endfunction

  function automatic logic is_cpl(input logic [31:0] dw0);
    // Cpl, CplD, CplLk, CplDLk (type 0101x)
    return dw0[28:25] == 4'b0101;
  endfunction

  function automatic tlp_class_e tlp_class(input logic [31:0] dw0);
    if (is_cpl(dw0))                          return CLS_CPL;
    else if (is_mem_req(dw0) && has_data(dw0)) return CLS_POSTED;
    else if (dw0[28:24] inside {5'b10000, 5'b10001, 5'b10010, 5'b10011,
                                5'b10100, 5'b10101, 5'b10110, 5'b10111})
                                              return CLS_POSTED;  // messages
    else                                      return CLS_NONPOSTED;
  endfunction

  // Payload length in DWs (a length field of 0 means 1024 DWs).
  function automatic logic [10:0] payload_dws(input logic [31:0] dw0);
    if (!has_data(dw0))        return 11'd0;
    else if (dw0[9:0] == 10'd0) return 11'd1024;
    else                       return {1'b0, dw0[9:0]};
  endfunction

  // Number of 64-bit words (QWs) the whole TLP occupies on the TRN bus.
  function automatic logic [10:0] tlp_qwords(input logic [31:0] dw0);
    logic [11:0] dws;
    dws = {1'b0, payload_dws(dw0)} + (hdr_4dw(dw0) ? 12'd4 : 12'd3);
    return 11'((dws + 12'd1) >> 1);
  endfunction

  // Lower 32 bits of the address of a memory request, taken from QW1.
  function automatic logic [31:0] req_addr_lo(input logic [31:0] dw0,
                                              input logic [63:0] qw1);
    return hdr_4dw(dw0) ? qw1[31:0] : qw1[63:32];
  endfunction

endpackage
