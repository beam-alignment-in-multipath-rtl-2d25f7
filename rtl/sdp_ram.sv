// sdp_ram: simple dual-port RAM, one write port and one read port on one clock.
//
// It holds the radar data square (received fast-time samples of every packet
// of every beam) and the ping-pong range-spectrum buffer of the radar signal
// processor. A write with we=1 stores wdata at waddr on the rising edge. The
// read port is registered: rdata shows the word at raddr one cycle after raddr
// is presented (re must be 1; otherwise rdata holds). A read of the address
// being written in the same cycle returns the old word. The contents are not
// reset; every word is written before it is read. The paper names these
// buffers; the port arrangement and one-cycle read latency are this design's.
module sdp_ram #(
  parameter int W     = 32,
  parameter int DEPTH = 1024,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
