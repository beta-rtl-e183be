// transpose_unit: transposes QMM results sent to out2.
//
// Results leave the serial-to-parallel stage as row vectors of VL elements.
// For the next operation a result matrix is often needed the other way round
// (for example keys, which enter query x key-transpose as columns). This unit
// collects VL row vectors into a VL x VL tile and then emits the tile's VL
// columns, one per cycle, as column vectors. It holds two tiles: while one is
// being emitted the other fills. The producer must not write a bank that is
// still waiting to be emitted (an assertion checks this); the QMM engine
// cannot, since filling a tile takes at least 4 VL cycles and emitting VL+1.
// flush closes a partly filled tile, including a row written in the same
// cycle; out_rows gives the number of valid rows
// (elements) in every emitted column vector.
// Timing: column c of a closed tile appears c+2 cycles after it closed when
// the other bank is idle, otherwise after that bank's columns.
// The paper names the block and its place on out2; the tile size and
// double buffering are this design's choice.
module transpose_unit #(
  parameter int unsigned VL    = 64,
  parameter int unsigned ACC_W = 32,
  localparam int unsigned CW   = $clog2(VL + 1),
  localparam int unsigned IW   = $clog2(VL)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [ACC_W-1:0] in_vec [VL],
  input  logic             flush,
  output logic             out_valid,
  output logic [ACC_W-1:0] out_vec [VL],
  output logic [CW-1:0]    out_rows
);
  logic [ACC_W-1:0] tile [2][VL][VL];
  logic             wbank, rbank, draining;
  logic [1:0]       full;
  logic [CW-1:0]    wrow;
  logic [CW-1:0]    rows [2];
  logic [IW-1:0]    col;
  logic             close;

  assign close = (in_valid && (wrow == CW'(VL - 1) || flush)) || (flush && !in_valid && wrow != '0);

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int c = 0; c < int'(VL); c++) tile[wbank][wrow[IW-1:0]][c] <= in_vec[c];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wbank    <= 1'b0;
      rbank    <= 1'b0;
      wrow     <= '0;
      full     <= '0;
      rows[0]  <= '0;
      rows[1]  <= '0;
      draining <= 1'b0;
      col      <= '0;
    end else begin
      // fill side: a closed tile is marked full and the other bank fills
      if (close) begin
        wbank       <= ~wbank;
        wrow        <= '0;
        rows[wbank] <= in_valid ? wrow + CW'(1) : wrow;
      end else if (in_valid) begin
        wrow <= wrow + CW'(1);
      end
      // drain side: emit the columns of a full bank, then release it
      if (!draining) begin
        if (full[rbank]) begin
          draining <= 1'b1;
          col      <= '0;
        end
      end else begin
        col <= col + IW'(1);
        if (col == IW'(VL - 1)) begin
          draining <= 1'b0;
          rbank    <= ~rbank;
        end
      end
      for (int k = 0; k < 2; k++) begin
        if (close && wbank == 1'(k)) full[k] <= 1'b1;
        else if (draining && col == IW'(VL - 1) && rbank == 1'(k)) full[k] <= 1'b0;
      end
    end
  end

  assign out_valid = draining;
  assign out_rows  = rows[rbank];
  always_comb for (int r = 0; r < int'(VL); r++) out_vec[r] = tile[rbank][r][col];

  // The bank being filled must not still be waiting to be emitted.
  assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> !full[wbank]);
endmodule
