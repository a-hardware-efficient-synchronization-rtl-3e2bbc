// timing_sync -- symbol-timing (STO) estimation by XCR peak search, eq. (8).
//
// After the preamble detector fires, the block waits SEARCH_DELAY samples
// and then scans a window of SEARCH_WIN samples (Delta = 56*Nov = 224) of the
// XCR metric for its largest value.  The sample index of that maximum is the
// STO estimate d_hat.  The first of several equal maxima wins.
//
// The scheme fixes the window length but not where the window starts.  Here
// it starts a fixed SEARCH_DELAY samples after detection; the default (282)
// centres the window on the XCR peak for a detection that happens at the
// nominal point of the first preamble symbol.  Detection is ignored while a
// search is in progress.
//
// Interface: all inputs belong to one sample and are taken on enables.
// idx is the sample index (any free-running count) that d_hat is reported
// in.  start is high (combinational) on the sample whose detection starts a
// search; new_max is high (combinational) on each sample that becomes the
// running maximum, so a neighbour block can capture values that belong to
// the peak.  sto_valid is a one-sample pulse, registered, on the sample after
// the last one of the window; d_hat is valid with it and held afterwards.
module timing_sync #(
  parameter int unsigned XW           = 12,
  parameter int unsigned IDX_W        = 16,
  parameter int unsigned SEARCH_DELAY = 282,
  parameter int unsigned SEARCH_WIN   = 224
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic             detect,
  input  logic [XW-1:0]    xcr,
  input  logic [IDX_W-1:0] idx,
  output logic             start,
  output logic             searching,
  output logic             new_max,
  output logic             sto_valid,
  output logic [IDX_W-1:0] d_hat
);
  localparam int unsigned CW = $clog2((SEARCH_DELAY > SEARCH_WIN ? SEARCH_DELAY : SEARCH_WIN) + 1);

  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_SEARCH} state_t;

  state_t           state;
  logic [CW-1:0]    cnt;
  logic [XW-1:0]    max_q;
  logic [IDX_W-1:0] max_idx;

  assign start     = (state == S_IDLE) && detect;
  assign searching = (state == S_SEARCH);
  assign new_max   = searching && ((cnt == '0) || (xcr > max_q));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cnt       <= '0;
      max_q     <= '0;
      max_idx   <= '0;
      sto_valid <= 1'b0;
      d_hat     <= '0;
    end else if (en) begin
      sto_valid <= 1'b0;
      unique case (state)
        S_IDLE: begin
          cnt <= '0;
          if (detect) state <= (SEARCH_DELAY == 0) ? S_SEARCH : S_WAIT;
        end
        S_WAIT: begin
          if (cnt == CW'(SEARCH_DELAY - 1)) begin
            cnt   <= '0;
            state <= S_SEARCH;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_SEARCH: begin
          if (new_max) begin
            max_q   <= xcr;
            max_idx <= idx;
          end
          if (cnt == CW'(SEARCH_WIN - 1)) begin
            cnt       <= '0;
            state     <= S_IDLE;
            sto_valid <= 1'b1;
            d_hat     <= new_max ? idx : max_idx;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The assertions are disabled during reset; that disable iff is the only
  // place where rst_n is read outside an asynchronous reset.
  // a result is only reported when the search has just ended
  a_result_after_search: assert property (@(posedge clk) disable iff (!rst_n)
    sto_valid |-> state == S_IDLE);
  // the running maximum only moves inside the window
  a_max_in_window: assert property (@(posedge clk) disable iff (!rst_n)
    new_max |-> searching);
endmodule
