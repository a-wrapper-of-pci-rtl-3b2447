// tlp_gen_pkg: builds TLPs for the testbenches, independently of the RTL.
//
// A TLP is held as a list of 64-bit words in the order of the 64-bit TRN
// interface (first DW in bits [63:32]) plus a flag saying that only the upper
// DW of the last word is used. Headers follow the PCIe base specification:
// DW0 = {R, fmt[1:0], type[4:0], R, TC[2:0], R x4, TD, EP, attr[1:0], R x2,
// length[9:0]}.
package tlp_gen_pkg;

  class tlp_c;
    logic [63:0] qw[$];
    bit          half;
    int          dws;
  endclass

  function automatic tlp_c pack_dws(input logic [31:0] d[$]);
    tlp_c t = new();
    t.dws = d.size();
    for (int i = 0; i < d.size(); i += 2) begin
      if (i + 1 < d.size()) t.qw.push_back({d[i], d[i+1]});
      else                  t.qw.push_back({d[i], 32'h0});
    end
    t.half = (d.size() % 2) != 0;
    return t;
  endfunction

  function automatic logic [31:0] dw0_of(input logic [1:0] fmt, input logic [4:0] typ,
                                         input int len);
    return {1'b0, fmt, typ, 1'b0, 3'd0, 4'd0, 1'b0, 1'b0, 2'd0, 2'd0, 10'(len)};
  endfunction

  // memory write, 32-bit (4DW header when a64) address, len DWs of payload
  function automatic tlp_c mwr(input logic [31:0] addr, input int len,
                               input logic [31:0] first_dw, input bit a64 = 0);
    logic [31:0] d[$];
    d.push_back(dw0_of(a64 ? 2'b11 : 2'b10, 5'b00000, len));
    d.push_back({16'h0100, 8'h00, (len > 1) ? 4'hF : 4'h0, 4'hF});
    if (a64) d.push_back(32'h0000_0001);
    d.push_back({addr[31:2], 2'b00});
    d.push_back(first_dw);
    for (int i = 1; i < len; i++) d.push_back($urandom);
    return pack_dws(d);
  endfunction

  // memory read, 32-bit address
  function automatic tlp_c mrd(input logic [31:0] addr, input int len,
                               input logic [15:0] req_id, input logic [7:0] tag);
    logic [31:0] d[$];
    d.push_back(dw0_of(2'b00, 5'b00000, len));
    d.push_back({req_id, tag, (len > 1) ? 4'hF : 4'h0, 4'hF});
    d.push_back({addr[31:2], 2'b00});
    return pack_dws(d);
  endfunction

  // completion with data
  function automatic tlp_c cpld(input int len, input logic [15:0] req_id,
                                input logic [7:0] tag);
    logic [31:0] d[$];
    d.push_back(dw0_of(2'b10, 5'b01010, len));
    d.push_back({16'h0008, 3'b000, 1'b0, 12'(len * 4)});
    d.push_back({req_id, tag, 8'h00});
    for (int i = 0; i < len; i++) d.push_back($urandom);
    return pack_dws(d);
  endfunction

  // I/O write: a TLP type the wrapper does not route
  function automatic tlp_c iowr(input logic [31:0] addr);
    logic [31:0] d[$];
    d.push_back(dw0_of(2'b10, 5'b00010, 1));
    d.push_back({16'h0100, 8'h00, 4'h0, 4'hF});
    d.push_back({addr[31:2], 2'b00});
    d.push_back($urandom);
    return pack_dws(d);
  endfunction

endpackage
