// packet_merge: N-way merge of one-word packet streams onto one stream.
//
// Models the packet-merge construct that lets the three gates of a row group
// share one interface tile. Each packet carries its own ID, so the order of
// arrival does not matter downstream. Arbitration is round robin (this
// design's choice; the source notes only that the arrival order is hard to
// predict). The output is registered; every output word is a complete packet,
// so out_last is always set.
// Timing: one packet per cycle at most; an input is taken on the edge where it
// holds the grant and the output register is free.
module packet_merge
  import gru_pkg::*;
#(
  parameter int unsigned N_IN = 3,
  localparam int unsigned SW = (N_IN > 1) ? $clog2(N_IN) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N_IN-1:0] in_valid,
  output logic [N_IN-1:0] in_ready,
  input  logic [31:0]   in_data [N_IN],
  output logic          out_valid,
  input  logic          out_ready,
  output logic [31:0]   out_data,
  output logic          out_last
);
  logic [SW-1:0] ptr;      // highest priority input this cycle
  logic [SW-1:0] sel;
  logic          any;
  logic          out_free;

  assign out_free = !out_valid || out_ready;
  assign out_last = 1'b1;

  always_comb begin
    sel = ptr;
    any = 1'b0;
    for (int j = 0; j < N_IN; j++) begin
      if (!any && in_valid[(int'(ptr) + j) % N_IN]) begin
        any = 1'b1;
        sel = SW'((int'(ptr) + j) % N_IN);
      end
    end
    in_ready = '0;
    if (any && out_free) in_ready[sel] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (any && out_free) begin
        out_valid <= 1'b1;
        out_data  <= in_data[sel];
        ptr       <= (sel == SW'(N_IN - 1)) ? '0 : sel + 1'b1;
      end
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
