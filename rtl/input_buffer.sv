// input_buffer -- the Domino input buffer at the west edge of the tile mesh.
//
// The paper names this buffer only: it "stores the required input data
// temporarily" and sits beside the mesh, connected to the west port of the
// first tile of every mesh row. This design gives it one queue per mesh
// row, so that different image rows can be streamed into different rows of
// tiles in the same step (needed by the weight-duplication dataflow).
//
// Loading: the host writes entry `wr_addr` of row `wr_row` with a packet
// (Nc 8-bit values, one per crossbar row) and a valid bit; an entry with
// the valid bit clear is a bubble (a step in which that row receives
// nothing). Streaming: a pulse on `start` sends entries 0 .. len-1, one per
// step, all rows together; out_valid[r]/out_data[r] drive the west IFM
// link of mesh row r. `busy` is high while streaming. The queue depth
// (64 entries per row) is this design's choice; the paper gives none.
module input_buffer
  import domino_pkg::*;
#(
  parameter int unsigned AR    = 30,
  parameter int unsigned NC    = 256,
  parameter int unsigned DEPTH = 64
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         wr_en,
  input  logic [$clog2(AR)-1:0]        wr_row,
  input  logic [$clog2(DEPTH)-1:0]     wr_addr,
  input  logic                         wr_valid,
  input  logic [NC*LANE_W-1:0]         wr_data,
  input  logic                         start,
  input  logic [$clog2(DEPTH+1)-1:0]   len,
  output logic                         busy,
  output logic [AR-1:0]                out_valid,
  output logic [AR-1:0][NC*LANE_W-1:0] out_data
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [NC*LANE_W-1:0]     mem [AR][DEPTH];
  logic [DEPTH-1:0]         vld [AR];
  logic [AW:0]              ptr, last;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_row][wr_addr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < AR; r++) begin
        vld[r]      <= '0;
        out_data[r] <= '0;
      end
      busy      <= 1'b0;
      ptr       <= '0;
      last      <= '0;
      out_valid <= '0;
    end else begin
      if (wr_en) vld[wr_row][wr_addr] <= wr_valid;
      out_valid <= '0;
      if (start && !busy) begin
        busy <= (len != 0);
        ptr  <= '0;
        last <= (AW+1)'(len);
      end else if (busy) begin
        for (int r = 0; r < AR; r++) begin
          out_valid[r] <= vld[r][ptr[AW-1:0]];
          out_data[r]  <= mem[r][ptr[AW-1:0]];
        end
        ptr <= ptr + 1'b1;
        if (ptr + 1'b1 >= last) busy <= 1'b0;
      end
    end
  end
endmodule
