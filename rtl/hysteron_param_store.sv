// Parameter store of the hysteron array: alpha_i, beta_i, W_i and y0_i for
// every one of N hysterons.
//
// Every hysteron reads its own entry at all times, so the store is a bank
// of registers, not a RAM: N entries must be visible in parallel for the
// one-step computation of all relays. Entries are written one at a time
// through a single write port (we, waddr, wdata), taking effect at the next
// clock edge. Reset clears every entry to alpha = beta = 0, W = 0 and
// y0 = -1, so an entry that is never written adds nothing to the model
// output. The write port, its one-entry-per-cycle rate and the reset
// contents are this design's choice; the paper only says that the
// thresholds, the weight and the initial state are stored per hysteron.
//
// Assertions check the rules the paper sets on the parameters:
// alpha_i >= beta_i and y0_i in {-1, +1}; and that waddr is in range.
module hysteron_param_store
  import preisach_pkg::*;
#(
  parameter int unsigned N    = 3240,
  parameter int unsigned AW   = (N > 1) ? $clog2(N) : 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        we,
  input  logic [AW-1:0] waddr,
  input  hyst_param_t wdata,
  output hyst_param_t params [N]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin
        params[i].alpha  <= '0;
        params[i].beta   <= '0;
        params[i].weight <= '0;
        params[i].y0     <= STATE_NEG;
      end
    end else if (we) begin
      for (int i = 0; i < N; i++) begin
        if (waddr == AW'(i)) params[i] <= wdata;
      end
    end
  end

  a_addr_range: assert property (@(posedge clk) disable iff (!rst_n)
    we |-> (32'(waddr) < N)) else $error("hysteron_param_store: waddr %0d out of range", waddr);
  a_thresholds: assert property (@(posedge clk) disable iff (!rst_n)
    we |-> (wdata.alpha >= wdata.beta)) else $error("hysteron_param_store: alpha < beta");
  a_init_state: assert property (@(posedge clk) disable iff (!rst_n)
    we |-> (wdata.y0 == STATE_POS || wdata.y0 == STATE_NEG))
    else $error("hysteron_param_store: y0 is not -1 or +1");

endmodule
