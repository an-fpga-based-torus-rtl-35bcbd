// phy_model: behavioural model of a link channel for the testbenches: the
// sending PHY, the serial cable and the receiving PHY together. Not
// synthesizable logic; it stands in for a pair of external XAUI
// transceivers.
//
// While `link_up` is low (the testbenches tie it to the inverse of reset)
// the channel carries idle words, as a PHY does before it has aligned.
// Words are delayed by LATENCY cycles (default 30, i.e. 120 ns at 250 MHz,
// roughly half of the 0.24 us the PHYs add to a link crossing). Errors can
// be injected: `corrupt_data` flips bit 0 of the next data word that enters
// the channel (one word per rising request, counted in `n_corrupted`);
// while `corrupt_fb` is high every feedback control word is damaged.
module phy_model
  import tnw_pkg::*;
#(
  parameter int LATENCY = 30
) (
  input  logic      clk,
  input  logic      link_up,
  input  phy_word_t din,
  output phy_word_t dout,
  input  logic      corrupt_data,
  input  logic      corrupt_fb,
  output int        n_corrupted
);
  phy_word_t pipe [LATENCY];
  logic      armed = 1'b0;
  logic      prev  = 1'b0;

  initial begin
    n_corrupted = 0;
    for (int i = 0; i < LATENCY; i++) pipe[i] = ctrl_word(K_IDLE, FB_NONE, '0);
  end

  always @(posedge clk) begin
    phy_word_t w;
    // until the link is up the receiving PHY reports idle
    w = link_up ? din : ctrl_word(K_IDLE, FB_NONE, '0);
    prev <= corrupt_data;
    if (corrupt_data && !prev) armed <= 1'b1;
    if ((armed || (corrupt_data && !prev)) && w.ctrl == 4'b0000) begin
      w.data[0] = ~w.data[0];
      armed <= 1'b0;
      n_corrupted <= n_corrupted + 1;
    end
    if (corrupt_fb && w.ctrl == 4'b0001 && w.data[7:0] == K_FB) begin
      w.data[16] = ~w.data[16];
      n_corrupted <= n_corrupted + 1;
    end
    for (int i = LATENCY - 1; i > 0; i--) pipe[i] <= pipe[i-1];
    pipe[0] <= w;
  end

  assign dout = pipe[LATENCY-1];
endmodule
