// cluster_engine_top: the clustering engine, single or as a cascade of two.
//
// N_STAGES = 1 (default) is one cluster_engine. With N_STAGES = 2 a second
// engine reclusters the output of the first: the first engine leaves every
// cluster at one of its ends, which then becomes the entry point in the
// second, so each cluster comes out ordered from one end to the other. The
// first engine starts its read phase only while the second can take the whole
// event (out_ready of stage 1 = in_ready of stage 2), and passes on only
// valid words plus the word carrying out_last. Cascading two engines is the
// paper's suggestion; the coupling of the two is this design's.
// overflow is the OR of the stages' overflow flags. Ports as in
// cluster_engine.
module cluster_engine_top
  import ce_pkg::*;
#(
  parameter int unsigned N_STAGES = 1
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  in_valid,
  input  word_t in_data,
  input  logic  in_last,
  output logic  in_ready,
  input  logic  out_ready,
  output logic  out_valid,
  output word_t out_data,
  output logic  out_last,
  output logic  overflow
);
  logic  s_valid [N_STAGES+1];
  word_t s_data  [N_STAGES+1];
  logic  s_last  [N_STAGES+1];
  logic  s_ready [N_STAGES+1];
  logic [N_STAGES-1:0] s_ovf;

  assign s_valid[0] = in_valid;
  assign s_data[0]  = in_data;
  assign s_last[0]  = in_last;
  assign in_ready   = s_ready[0];
  assign s_ready[N_STAGES] = out_ready;

  for (genvar i = 0; i < N_STAGES; i++) begin : g_stage
    logic  o_valid, o_last;
    word_t o_data;
    cluster_engine u_eng (
      .clk, .rst,
      .in_valid(s_valid[i]), .in_data(s_data[i]), .in_last(s_last[i]),
      .in_ready(s_ready[i]), .out_ready(s_ready[i+1]),
      .out_valid(o_valid), .out_data(o_data), .out_last(o_last),
      .overflow(s_ovf[i])
    );
    if (i == N_STAGES - 1) begin : g_out
      assign s_valid[i+1] = o_valid;
    end else begin : g_mid
      assign s_valid[i+1] = o_valid | o_last;
    end
    assign s_data[i+1] = o_data;
    assign s_last[i+1] = o_last;
  end

  assign out_valid = s_valid[N_STAGES];
  assign out_data  = s_data[N_STAGES];
  assign out_last  = s_last[N_STAGES];
  assign overflow  = |s_ovf;
endmodule
