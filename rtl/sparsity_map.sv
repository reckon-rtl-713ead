// sparsity_map: double-buffered binary activity map of one timestep.
//
// Spikes produced during a timestep (input events from the address-event
// decoder, or hidden-neuron spikes from the firing pass) set bits of the
// `next` map. At the start of the following timestep `swap` moves `next`
// into `cur` and clears `next`, so the forward pass reads a frozen map while
// new activity is collected. `clear` empties both maps (start of a sample).
// A set in the same cycle as a swap lands in the new `next` map. Keeping the
// activity as one bit per neuron and processing only the non-zero entries
// follows the processor description; the double buffering is this
// implementation's reading of "buffered until processed at the next step".
module sparsity_map #(
  parameter int unsigned N = 256,
  localparam int unsigned AW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          set_en,
  input  logic [AW-1:0] set_idx,
  input  logic          swap,
  input  logic          clear,
  output logic [N-1:0]  cur,
  output logic [N-1:0]  nxt
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur <= '0;
      nxt <= '0;
    end else if (clear) begin
      cur <= '0;
      nxt <= '0;
    end else begin
      if (swap) begin
        cur <= nxt;
        nxt <= '0;
      end
      if (set_en) nxt[set_idx] <= 1'b1;
    end
  end
endmodule
