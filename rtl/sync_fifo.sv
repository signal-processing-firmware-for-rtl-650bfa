// sync_fifo: single-clock first-in first-out buffer used by the stream blocks
// (SPEAD formatter payload buffer, tile beamformer exchange alignment, station
// beamformer local-frame queue). Write when wr_en and not full; read
// (first-word fall-through) when rd_en and not empty. DEPTH must be a power
// of two. Storage is a plain array; occupancy is reported on `count`.
module sync_fifo #(
  parameter int unsigned W     = 64,
  parameter int unsigned DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  output logic         full,
  input  logic         rd_en,
  output logic [W-1:0] rd_data,
  output logic         empty,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [W-1:0]  mem [DEPTH];
  logic [AW:0]   wp, rp;

  assign count   = wp - rp;
  assign full    = (count == (AW+1)'(DEPTH));
  assign empty   = (wp == rp);
  assign rd_data = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (wr_en && !full) begin
        mem[wp[AW-1:0]] <= wr_data;
        wp <= wp + 1'b1;
      end
      if (rd_en && !empty) rp <= rp + 1'b1;
    end
  end
endmodule
