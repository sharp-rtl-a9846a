// sharp_ih_buffer: the input/hidden (I/H) vector SRAM (2.3 MB by default).
//
// A line holds N fp16 elements, element e of a vector being lane e mod N of
// line base + e / N, so one line read feeds every VS unit of the compute unit
// with its scalar in one cycle (the unit then picks the N/R scalars of the
// current tile step). Input sequences x_t are written through the load port
// (standing for the memory controller); hidden vectors h_t are written by the
// cell updater K/4 elements at a time into a region the controller uses as a
// ping-pong pair. The cell-updater port has priority; the load port is told to
// wait (ld_ready low) in a cycle where both would write. Reads take one cycle.
// Size and role follow the accelerator's description; line organisation, port
// priority and latency are this design's choices.
module sharp_ih_buffer
  import sharp_pkg::*;
#(
  parameter int unsigned N     = 32,     // elements per line (one per VS unit)
  parameter int unsigned HW    = 8,      // elements per hidden write (K/4)
  parameter int unsigned LINES = 37683,  // 2.3 MB / (N * 2 bytes)
  localparam int unsigned AW   = $clog2(LINES),
  localparam int unsigned LW   = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  // compute-unit read port
  input  logic          rd_en,
  input  logic [AW-1:0] rd_line,
  output fp16_t         rd_data [N],
  // hidden-vector write port (cell updater), HW elements starting at lane h_lane
  input  logic          h_wr_en,
  input  logic [AW-1:0] h_wr_line,
  input  logic [LW-1:0] h_wr_lane,
  input  fp16_t         h_wr_data [HW],
  // load port (memory controller), any subset of a line's lanes
  input  logic          ld_en,
  output logic          ld_ready,
  input  logic [AW-1:0] ld_line,
  input  logic [N-1:0]  ld_mask,
  input  fp16_t         ld_data [N]
);
  fp16_t mem [LINES][N];

  assign ld_ready = !h_wr_en;

  always_ff @(posedge clk) begin
    if (h_wr_en) begin
      for (int i = 0; i < HW; i++) mem[h_wr_line][LW'(int'(h_wr_lane) + i)] <= h_wr_data[i];
    end else if (ld_en) begin
      for (int l = 0; l < N; l++) if (ld_mask[l]) mem[ld_line][l] <= ld_data[l];
    end
    if (rd_en) rd_data <= mem[rd_line];
  end

  // hidden writes are aligned to HW elements and stay inside one line
  assert property (@(posedge clk) h_wr_en |-> (int'(h_wr_lane) % HW == 0));
endmodule
