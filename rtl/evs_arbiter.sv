// evs_arbiter: 2D arbitration and address encoding for the event sensor.
//
// Each pixel of the SIZE x SIZE array holds a request (one bit per polarity)
// in its handshake buffer until it is acknowledged. The arbiter first picks
// one column that has a request, then one row within that column, encodes
// the winner as an address event {p, x, y} and acknowledges that pixel
// request. Pixels whose kill bit is set are ignored, as if their pixel and
// buffer were held in reset.
//
// The paper describes one arbiter tree for the columns and one for the rows
// followed by an address encoder. The trees are asynchronous there; here both
// are round-robin priority pickers evaluated in one clock cycle, so that no
// column or row starves. When a pixel raises both polarities, ON is served
// first. The round-robin order and the polarity order are this design's.
//
// Interface: pix_req[y][x][p] level requests, pix_ack[y][x][p] a one-cycle
// acknowledge pulse; out_* a valid/ready channel. Timing: one event per cycle
// at most; an event leaves one cycle after its request is seen.
module evs_arbiter
  import speck_pkg::*;
#(
  parameter int unsigned SIZE = 128
) (
  input  logic clk,
  input  logic rst_n,
  input  logic [SIZE-1:0][SIZE-1:0][1:0] pix_req,
  input  logic [SIZE-1:0][SIZE-1:0]      pix_kill,
  output logic [SIZE-1:0][SIZE-1:0][1:0] pix_ack,
  output logic       out_valid,
  input  logic       out_ready,
  output dvs_event_t out_ev
);
  localparam int unsigned AW = (SIZE > 1) ? $clog2(SIZE) : 1;

  logic [SIZE-1:0] col_req;
  logic [SIZE-1:0] row_req;
  logic [AW-1:0]   col_ptr, row_ptr;
  logic [AW-1:0]   col_sel, row_sel;
  logic            col_any, row_any;
  logic            pol_sel;
  logic            take;

  // live requests: raised, not yet acknowledged, pixel not killed
  logic [SIZE-1:0][SIZE-1:0] live;   // [y][x]
  for (genvar y = 0; y < SIZE; y++) begin : g_live_y
    for (genvar x = 0; x < SIZE; x++) begin : g_live_x
      assign live[y][x] = (|(pix_req[y][x] & ~pix_ack[y][x])) & ~pix_kill[y][x];
    end
  end

  // column requests: OR over the column
  for (genvar x = 0; x < SIZE; x++) begin : g_col
    always_comb begin
      col_req[x] = 1'b0;
      for (int y = 0; y < SIZE; y++) col_req[x] |= live[y][x];
    end
  end

  // round-robin pick: first request at or above the pointer, else the lowest
  always_comb begin
    col_any = 1'b0;
    col_sel = '0;
    for (int i = SIZE - 1; i >= 0; i--)
      if (col_req[i]) begin col_any = 1'b1; col_sel = AW'(i); end
    for (int i = SIZE - 1; i >= 0; i--)
      if (col_req[i] && (AW'(i) >= col_ptr)) col_sel = AW'(i);
  end

  always_comb begin
    for (int y = 0; y < SIZE; y++)
      row_req[y] = live[y][col_sel];
    row_any = 1'b0;
    row_sel = '0;
    for (int i = SIZE - 1; i >= 0; i--)
      if (row_req[i]) begin row_any = 1'b1; row_sel = AW'(i); end
    for (int i = SIZE - 1; i >= 0; i--)
      if (row_req[i] && (AW'(i) >= row_ptr)) row_sel = AW'(i);
    pol_sel = pix_req[row_sel][col_sel][1] & ~pix_ack[row_sel][col_sel][1];  // ON first
  end

  assign take = col_any && row_any && (!out_valid || out_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_ev    <= '0;
      col_ptr   <= '0;
      row_ptr   <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take) begin
        out_valid <= 1'b1;
        out_ev.p  <= pol_sel;
        out_ev.x  <= XW'(col_sel);
        out_ev.y  <= XW'(row_sel);
        col_ptr   <= col_sel + 1'b1;
        row_ptr   <= row_sel + 1'b1;
      end
    end
  end

  // A request still high while its acknowledge is out is masked above: the
  // pixel buffer clears on the acknowledge edge, so it is never served twice.

  // acknowledge: a one-cycle pulse to the pixel request just encoded
  for (genvar y = 0; y < SIZE; y++) begin : g_ack_y
    for (genvar x = 0; x < SIZE; x++) begin : g_ack_x
      for (genvar p = 0; p < 2; p++) begin : g_ack_p
        always_ff @(posedge clk or negedge rst_n) begin
          if (!rst_n) pix_ack[y][x][p] <= 1'b0;
          else        pix_ack[y][x][p] <= take && (row_sel == AW'(y)) && (col_sel == AW'(x))
                                          && (pol_sel == 1'(p));
        end
      end
    end
  end
endmodule
