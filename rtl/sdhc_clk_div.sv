// sdhc_clk_div: programmable integer divider that makes the SD bus clock from the system clock.
//
// The SD clock is a flip-flop toggled every HALF system cycles, HALF = max(1, div_i), so the
// SD clock period is 2*max(1, div_i) system cycles; div_i is the SDHCI "SDCLK frequency select"
// field, whose encoding asks for divisor 2*N. Everything else in the controller runs on the
// system clock, so besides the pin the divider emits two one-cycle enables: rise_o is high in the
// system cycle whose closing edge raises the SD clock (inputs from the card are sampled then) and
// fall_o in the cycle whose closing edge lowers it (outputs to the card change then, half an SD
// period ahead of the card's sampling edge).
//
// The clock runs while en_i is set. stop_i, from the data logic, holds the clock low: a high
// phase in progress finishes, the next rising edge is withheld until stop_i drops. This is how
// the controller pauses the card when its buffer is full during reads.
//
// Following the paper: integer divider from the system clock; the data logic can stop the clock.
// This design's choice: divisor 0 gives the same clock as 1 (half the system clock), since a
// toggled flip-flop cannot run at the system clock rate; the clock idles low.
module sdhc_clk_div #(
  parameter int unsigned DIV_W = 8
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             en_i,     // SD clock enable
  input  logic [DIV_W-1:0] div_i,    // SDCLK frequency select, half period in system cycles
  input  logic             stop_i,   // pause request from the data logic
  output logic             sd_clk_o,
  output logic             rise_o,
  output logic             fall_o
);

  logic [DIV_W-1:0] cnt_q;
  logic [DIV_W-1:0] half;
  logic             edge_due;

  assign half     = (div_i == '0) ? DIV_W'(1) : div_i;
  assign edge_due = (cnt_q >= half - DIV_W'(1));

  assign fall_o    = edge_due && sd_clk_o;
  assign rise_o    = edge_due && !sd_clk_o && en_i && !stop_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cnt_q    <= '0;
      sd_clk_o <= 1'b0;
    end else if (rise_o || fall_o) begin
      cnt_q    <= '0;
      sd_clk_o <= !sd_clk_o;
    end else if (!edge_due) begin
      cnt_q <= cnt_q + DIV_W'(1);
    end
  end

endmodule
