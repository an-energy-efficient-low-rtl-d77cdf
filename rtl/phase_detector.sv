`timescale 1ps/1fs
// phase_detector: "Early-Late" block of the CDR, on Clk_pi/4.
//
// Seven Alexander (bang-bang) phase detectors work in parallel on one 8-bit
// group of data samples D0..D7 and the edge samples E0..E7 taken between them
// (E_i lies between D_i and D_i+1). Where D_i differs from D_i+1, E_i equal
// to D_i means the sampling clock is early (the edge sample came before the
// transition), E_i equal to D_i+1 means it is late. The output is the number
// of early decisions minus the number of late ones (-7 .. +7), registered,
// with pd_valid high for one cycle per new group (a toggle of grp_tgl).
// Structure and count follow the paper; the sign convention is this design's.
module phase_detector (
  input  logic              clk,          // Clk_pi/4
  input  logic              rst_n,
  input  logic              en,
  input  logic [7:0]        grp_data,
  input  logic [7:0]        grp_edge,
  input  logic              grp_tgl,
  output logic signed [3:0] pd_out,
  output logic              pd_valid
);
  logic       tgl_seen;
  logic [6:0] early, late;
  logic [2:0] n_early, n_late;

  always_comb begin
    for (int i = 0; i < 7; i++) begin
      early[i] = (grp_data[i] != grp_data[i+1]) && (grp_edge[i] == grp_data[i]);
      late[i]  = (grp_data[i] != grp_data[i+1]) && (grp_edge[i] == grp_data[i+1]);
    end
    n_early = 3'($countones(early));
    n_late  = 3'($countones(late));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tgl_seen <= 1'b0;
      pd_out   <= '0;
      pd_valid <= 1'b0;
    end else begin
      tgl_seen <= grp_tgl;
      pd_valid <= en && (grp_tgl != tgl_seen);
      pd_out   <= $signed({1'b0, n_early}) - $signed({1'b0, n_late});
    end
  end
endmodule
