// nop_xbar: die-to-die network between the compute dies.
//
// Carries micro-slice headers from each chiplet to the chiplet it names
// (tx_dst). Each destination has one output register. When it is empty, or
// being emptied this clock, it takes one header from the senders that target
// it, chosen round-robin starting after the last sender served, and that
// sender sees tx_ready. A header therefore reaches its destination one clock
// after it is accepted, and a destination receives at most one per clock.
// A chiplet may send to itself; the controllers never do.
//
// The package's network is a 2D mesh of UCIe links. Mesh routing, hop
// latency and link bandwidth are not modelled here: a 2x2 array reaches every
// chiplet in at most two hops, and this block stands for the whole network
// as a registered crossbar. The arbitration is this design's choice.
module nop_xbar
  import fse_pkg::*;
#(
  parameter int unsigned NUM_CHIPLETS = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [NUM_CHIPLETS-1:0] tx_valid,
  input  cid_t                    tx_dst [NUM_CHIPLETS],
  input  mshdr_t                  tx_hdr [NUM_CHIPLETS],
  output logic [NUM_CHIPLETS-1:0] tx_ready,
  output logic [NUM_CHIPLETS-1:0] rx_valid,
  output mshdr_t                  rx_hdr [NUM_CHIPLETS],
  input  logic [NUM_CHIPLETS-1:0] rx_ready
);

  localparam int unsigned CW = (NUM_CHIPLETS > 1) ? $clog2(NUM_CHIPLETS) : 1;

  logic [CW-1:0]           last [NUM_CHIPLETS];
  logic [NUM_CHIPLETS-1:0] gnt_v;
  logic [CW-1:0]           gnt_s [NUM_CHIPLETS];

  always_comb begin
    logic [CW-1:0] s;
    tx_ready = '0;
    gnt_v    = '0;
    s        = '0;
    for (int unsigned d = 0; d < NUM_CHIPLETS; d++) begin
      gnt_s[d] = '0;
      if (!rx_valid[d] || rx_ready[d]) begin
        for (int unsigned k = 1; k <= NUM_CHIPLETS; k++) begin
          s = CW'((32'(last[d]) + k) % NUM_CHIPLETS);
          if (!gnt_v[d] && tx_valid[s] && 32'(tx_dst[s]) == d) begin
            gnt_v[d]    = 1'b1;
            gnt_s[d]    = CW'(s);
            tx_ready[s] = 1'b1;
          end
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_valid <= '0;
      for (int unsigned d = 0; d < NUM_CHIPLETS; d++) begin
        rx_hdr[d] <= '0;
        last[d]   <= CW'(NUM_CHIPLETS - 1);
      end
    end else begin
      for (int unsigned d = 0; d < NUM_CHIPLETS; d++) begin
        if (gnt_v[d]) begin
          rx_valid[d] <= 1'b1;
          rx_hdr[d]   <= tx_hdr[gnt_s[d]];
          last[d]     <= gnt_s[d];
        end else if (rx_ready[d]) begin
          rx_valid[d] <= 1'b0;
        end
      end
    end
  end

endmodule
