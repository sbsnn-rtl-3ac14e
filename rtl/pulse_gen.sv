// pulse_gen: spike generator of the synapse characterisation structure.
//
// On `fire` it produces one PRE and one POST pulse whose timing difference
// t_post - t_pre equals the signed TIME_IN (in clocks): positive -> PRE first,
// negative -> POST first, zero -> both in the same cycle. The first pulse leaves
// one cycle after `fire`. The paper gives TIME_IN and the two outputs; the rest is
// this design's.
module pulse_gen #(
  parameter int T_W = 5
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  fire,
  input  logic signed [T_W-1:0] time_in,
  output logic                  pre,
  output logic                  post,
  output logic                  busy
);

  logic [T_W-1:0] gap;       // cycles left until the second pulse
  logic           second_post;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pre         <= 1'b0;
      post        <= 1'b0;
      gap         <= '0;
      second_post <= 1'b0;
      busy        <= 1'b0;
    end else begin
      pre  <= 1'b0;
      post <= 1'b0;
      if (fire && !busy) begin
        if (time_in == '0) begin
          pre  <= 1'b1;
          post <= 1'b1;
        end else if (time_in > 0) begin
          pre         <= 1'b1;
          second_post <= 1'b1;
          gap         <= T_W'(time_in);
          busy        <= 1'b1;
        end else begin
          post        <= 1'b1;
          second_post <= 1'b0;
          gap         <= T_W'(-time_in);
          busy        <= 1'b1;
        end
      end else if (busy) begin
        if (gap == T_W'(1)) begin
          busy <= 1'b0;
          if (second_post) post <= 1'b1;
          else             pre  <= 1'b1;
        end
        gap <= gap - 1'b1;
      end
    end
  end

endmodule
