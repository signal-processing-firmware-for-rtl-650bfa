// dest_lut: destination table of the network output. The packet stream
// carries an 8-bit stream identifier (the AXI4-Stream tID of the original);
// the table, written by control software, turns it into the destination MAC
// address, IP address and UDP port used by the UDP/Ethernet MAC downstream.
// This is how the boards are linked into a station chain and how data is
// directed to the correlator or to the calibration system.
// Interface: one write port (wr_en with all three fields of entry wr_tid)
// and one read port; the read is registered, so the fields of rd_tid appear
// one clock after it is presented. The table contents are not reset. Table
// depth (256, the tID range) and the field widths (standard MAC, IPv4 and
// UDP sizes) follow the identifier width; the single-write format is this
// design's choice.
module dest_lut #(
  parameter int unsigned NTID = 256
) (
  input  logic                    clk,
  input  logic                    wr_en,
  input  logic [$clog2(NTID)-1:0] wr_tid,
  input  logic [47:0]             wr_mac,
  input  logic [31:0]             wr_ip,
  input  logic [15:0]             wr_port,
  input  logic [$clog2(NTID)-1:0] rd_tid,
  output logic [47:0]             rd_mac,
  output logic [31:0]             rd_ip,
  output logic [15:0]             rd_port
);
  logic [95:0] tbl [NTID];

  always_ff @(posedge clk) begin
    if (wr_en) tbl[wr_tid] <= {wr_mac, wr_ip, wr_port};
    {rd_mac, rd_ip, rd_port} <= tbl[rd_tid];
  end
endmodule
