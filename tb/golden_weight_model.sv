// golden_weight_model: behavioural stand-in for the storage of the known
// (pre-trained) weights that the tile reprograms its columns from.
//
// Holds one ROWS*G_BITS word per column in w[]; a testbench fills it by
// hierarchical assignment. A request (wt_req with wt_col) is answered with
// wt_valid and the column's weights; the answer is registered on the LAT-th
// clock edge that sees the request, so the requester sees wt_valid in its
// (LAT+1)-th request cycle.
module golden_weight_model #(
  parameter int unsigned ROWS   = 16,
  parameter int unsigned COLS   = 16,
  parameter int unsigned G_BITS = 4,
  parameter int unsigned LAT    = 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    wt_req,
  input  logic [$clog2(COLS)-1:0] wt_col,
  output logic                    wt_valid,
  output logic [ROWS*G_BITS-1:0]  wt_data
);

  logic [ROWS*G_BITS-1:0] w [COLS];
  int unsigned wait_cnt;
  int unsigned n_served;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wait_cnt <= 0;
      wt_valid <= 1'b0;
      wt_data  <= '0;
      n_served <= 0;
    end else begin
      wt_valid <= 1'b0;
      if (wt_req && !wt_valid) begin
        if (wait_cnt + 1 >= LAT) begin
          wt_valid <= 1'b1;
          wt_data  <= w[wt_col];
          wait_cnt <= 0;
          n_served <= n_served + 1;
        end else begin
          wait_cnt <= wait_cnt + 1;
        end
      end
    end
  end

endmodule
