// noise_filter: removes isolated events from a binary event frame.
//
// Rows arrive one per handshake, top to bottom. The filter keeps a window of
// three rows (above, centre, below) and emits the centre row with every pixel
// cleared that has no set pixel among its eight neighbours; outside the frame
// counts as empty. A row is emitted once the row below it has arrived, and the
// last row is emitted after in_last with an empty row below it.
//
// Interface: in_valid/in_ready/in_idx/in_data/in_last, out_* likewise.
// Timing: one row of latency; a whole row is filtered per cycle. The frame
// gains one extra output cycle for the flush of the last row.
//
// Follows the paper: row-by-row scanning and removal of noise events. Own
// choice: the rule "keep a pixel if any of its 8 neighbours is set", since the
// paper does not give the filter's criterion.
module noise_filter
  import anti_uav_pkg::*;
#(
  parameter int unsigned W = IMG_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  coord_t       in_idx,
  input  logic [W-1:0] in_data,
  input  logic         in_last,
  output logic         out_valid,
  input  logic         out_ready,
  output coord_t       out_idx,
  output logic [W-1:0] out_data,
  output logic         out_last
);

  logic [W-1:0] above, centre;
  logic         have_centre;   // centre row holds a real row
  coord_t       centre_idx;
  logic         flush;         // last row received, emit centre with empty below

  logic [W-1:0] below;
  logic [W-1:0] nbr;
  logic         emit;

  assign below = flush ? '0 : in_data;

  always_comb begin
    nbr = (above | below) | ((above | below) << 1) | ((above | below) >> 1)
        | (centre << 1) | (centre >> 1);
  end

  // the centre row can leave when the row below is present (or on flush)
  assign emit      = have_centre && (flush || in_valid);
  assign out_valid = emit;
  assign out_idx   = centre_idx;
  assign out_data  = centre & nbr;
  assign out_last  = flush;
  assign in_ready  = !flush && (!have_centre || out_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      above       <= '0;
      centre      <= '0;
      have_centre <= 1'b0;
      centre_idx  <= '0;
      flush       <= 1'b0;
    end else if (flush) begin
      if (out_ready) begin
        flush       <= 1'b0;
        have_centre <= 1'b0;
        above       <= '0;
        centre      <= '0;
      end
    end else if (in_valid && in_ready) begin
      above       <= have_centre ? centre : '0;
      centre      <= in_data;
      centre_idx  <= in_idx;
      have_centre <= 1'b1;
      flush       <= in_last;
    end
  end

endmodule
