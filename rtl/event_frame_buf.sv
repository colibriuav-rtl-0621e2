// Ping-pong event-frame buffer.
//
// Holds two event frames of DEPTH group bytes each (66x52 = 3432 bytes, one
// byte per 2x2 pixel group). The SAER receiver writes into the "fill" bank
// while the processor reads the last complete frame from the other "read"
// bank, so receiving the next frame overlaps with processing the previous
// one. swap_i, given when a frame has been received completely, exchanges the
// two banks. Double buffering is this design's reading of the platform's
// pipelined frame handling; the storage itself is not described in the paper.
//
// Interface: a write port (wr_en_i, wr_addr_i, wr_data_i) into the fill bank
// and a read port (rd_en_i, rd_addr_i) on the read bank. rd_data_o is valid
// one clock after rd_en_i (synchronous-read RAM). A write and a swap in the
// same clock write the old fill bank. Only the bank pointer is reset; the
// memory contents are not.
module event_frame_buf #(
  parameter int unsigned DEPTH = colibri_pkg::DVS_GROUPS,
  parameter int unsigned W     = 8,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          wr_en_i,
  input  logic [AW-1:0] wr_addr_i,
  input  logic [W-1:0]  wr_data_i,
  input  logic          swap_i,
  input  logic          rd_en_i,
  input  logic [AW-1:0] rd_addr_i,
  output logic [W-1:0]  rd_data_o,
  output logic          rd_bank_o
);

  localparam int unsigned MAW = $clog2(2 * DEPTH);

  logic [W-1:0]   mem_q [2*DEPTH];
  logic           fill_bank_q;
  logic [MAW-1:0] wr_idx, rd_idx;

  // bank b occupies entries b*DEPTH .. b*DEPTH + DEPTH-1
  assign wr_idx = MAW'(fill_bank_q ? DEPTH : 0) + MAW'(wr_addr_i);
  assign rd_idx = MAW'(fill_bank_q ? 0 : DEPTH) + MAW'(rd_addr_i);

  assign rd_bank_o = !fill_bank_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) fill_bank_q <= 1'b0;
    else if (swap_i) fill_bank_q <= !fill_bank_q;
  end

  always_ff @(posedge clk_i) begin
    if (wr_en_i && 32'(wr_addr_i) < DEPTH)
      mem_q[wr_idx] <= wr_data_i;
    if (rd_en_i)
      rd_data_o <= (32'(rd_addr_i) < DEPTH) ? mem_q[rd_idx] : '0;
  end

endmodule
