// dsd: delay-switch-delay commutator between two butterfly stages.
//
// Two register sets of D words and two 2:1 multiplexers. The lower input is
// delayed by D; the upper multiplexer then chooses the upper input (select 0)
// or the delayed lower input (select 1) and feeds the second D-word register
// set that drives the upper output; the lower output is the delayed lower
// input (select 0) or the undelayed upper input (select 1). With the select
// high during the second half of every 2D-cycle period, pairs that were D
// apart in time become pairs in the same cycle, which is the regrouping
// between butterfly stages. The forward NTT uses D = 2^(m-s-2) after stage s,
// the iNTT D = 2^s, both as the paper gives them.
//
// The select comes from a counter that restarts on in_first, so the DSD
// follows the block boundaries. in_valid/in_first leave D cycles later with
// the first output pair.
module dsd #(
  parameter int unsigned W = 30,
  parameter int unsigned D = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic         in_first,
  input  logic [W-1:0] x0,
  input  logic [W-1:0] x1,
  output logic         out_valid,
  output logic         out_first,
  output logic [W-1:0] y0,
  output logic [W-1:0] y1
);
  localparam int unsigned CW = $clog2(D) + 1;   // counts one 2D period

  logic [CW-1:0] cnt, u_now;
  logic          sel;
  logic [W-1:0]  dl_bot [D];
  logic [W-1:0]  dl_top [D];
  logic [W-1:0]  bot_d, top_mux;
  logic [D-1:0]  v_sr, f_sr;

  always_comb begin
    u_now   = in_first ? '0 : cnt;
    sel     = u_now[CW-1];
    bot_d   = dl_bot[D-1];
    top_mux = sel ? bot_d : x0;
    y1      = sel ? x0 : bot_d;
    y0      = dl_top[D-1];
  end

  always_ff @(posedge clk) begin
    dl_bot[0] <= x1;
    dl_top[0] <= top_mux;
    for (int unsigned i = 1; i < D; i++) begin
      dl_bot[i] <= dl_bot[i-1];
      dl_top[i] <= dl_top[i-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= '0;
      v_sr <= '0;
      f_sr <= '0;
    end else begin
      cnt  <= u_now + 1'b1;
      v_sr <= D'({v_sr, in_valid});
      f_sr <= D'({f_sr, in_first});
    end
  end
  assign out_valid = v_sr[D-1];
  assign out_first = f_sr[D-1];

endmodule
