// link_delay: behavioural model of a point-to-point board-to-board channel
// (an LVDS pair on the back-plane, or a cable between boards).
//
// The real part is a serialiser, differential driver, wire and receiver. For
// the synchronisation protocol only one property matters: a word launched in
// cycle c arrives, unchanged, in cycle c+LAT, with LAT fixed once the boards
// are connected (the sync counters are calibrated to it). This model is that
// property and nothing more: a LAT-deep register pipeline carrying a valid bit
// and W data bits. It is synthesizable, but stands for a link, not for logic
// on the controller. LAT must be at least 1.
module link_delay #(
  parameter int W   = 1,
  parameter int LAT = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  output logic [W-1:0] out_data
);
  logic [LAT-1:0] v;
  logic [W-1:0]   d [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v <= '0;
      for (int i = 0; i < LAT; i++) d[i] <= '0;
    end else begin
      v[0] <= in_valid;
      d[0] <= in_data;
      for (int i = 1; i < LAT; i++) begin
        v[i] <= v[i-1];
        d[i] <= d[i-1];
      end
    end
  end

  assign out_valid = v[LAT-1];
  assign out_data  = d[LAT-1];
endmodule
