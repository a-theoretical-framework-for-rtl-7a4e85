// toggle_monitor: measures the proxy's flip rate over a window and raises
// SAP_low when it is below the threshold.
//
// Every valid sample S_t after the first one of a window is compared with the
// previous sample S_t-1, which the Bernoulli encoder's flip-flop keeps; a
// difference adds one to the toggle count. After W samples
// (W-1 transitions) the window closes: sap_low takes (count < tau_th) and
// keeps it for the whole next window, and the count restarts. The threshold
// tau_th is given in toggles per window, i.e. tau_th_rate x (W-1). Windows are
// back to back; the transition across a window boundary is not counted.
//
// Ports: clk, rst_n (synchronous; clears sap_low and the window), valid, s
// (the current S_t), s_prev (S of the previous valid pair), tau_th in;
// toggles (count so far), sap_low, window_done
// (one-cycle pulse, registered, in the cycle after the window's last sample)
// out. The windowed count and threshold follow the method; the tumbling
// window and the threshold encoding are this design's choices.
module toggle_monitor
  import sap_pkg::*;
#(
  parameter int unsigned W = W_DEF
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      valid,
  input  logic                      s,
  input  logic                      s_prev,
  input  logic [cnt_width(W)-1:0]   tau_th,
  output logic [cnt_width(W)-1:0]   toggles,
  output logic                      sap_low,
  output logic                      window_done
);

  localparam int unsigned CW = cnt_width(W);

  logic [CW-1:0] pos;      // samples already taken in this window
  logic          flip;
  logic          last;

  assign flip = (pos != '0) && (s != s_prev);
  assign last = (pos == CW'(W - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pos         <= '0;
      toggles     <= '0;
      sap_low     <= 1'b0;
      window_done <= 1'b0;
    end else begin
      window_done <= 1'b0;
      if (valid) begin
        if (last) begin
          sap_low     <= (toggles + CW'(flip)) < tau_th;
          window_done <= 1'b1;
          toggles     <= '0;
          pos         <= '0;
        end else begin
          toggles <= toggles + CW'(flip);
          pos     <= pos + 1'b1;
        end
      end
    end
  end

  initial assert (W >= 2)
    else $error("toggle_monitor: W must be at least 2");

endmodule
