// lite_mac: Lite-MAC projection of the MIPS, V_low = MAC(V_reordered).
//
// start latches one DIM-element INT8 vector. The LOW rows of the projection
// matrix then arrive one per cycle on row_data (row_valid / row_ready
// handshake; row_ready is high while rows are still expected). Each accepted
// row k produces vlow[k] = sum_i vec[i] * row[i] with DIM multipliers and an
// adder tree in one cycle. done pulses in the cycle after the last row; vlow
// is held until the next start. The paper names the Lite-MAC and its role;
// the row-per-cycle schedule and the INT8 / 24-bit widths are this design's.
module lite_mac #(
  parameter int unsigned DIM = 64,
  parameter int unsigned LOW = 8,
  parameter int unsigned OW  = 24
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [8*DIM-1:0]      vec,
  input  logic                  row_valid,
  input  logic [8*DIM-1:0]      row_data,
  output logic                  row_ready,
  output logic                  done,
  output logic signed [OW-1:0]  vlow [LOW]
);

  logic [8*DIM-1:0]       vec_r;
  logic [$clog2(LOW+1)-1:0] cnt;
  logic                   active;
  logic signed [OW-1:0]   dot;

  always_comb begin
    dot = '0;
    for (int i = 0; i < DIM; i++)
      dot = dot + OW'($signed(vec_r[8*i +: 8]) * $signed(row_data[8*i +: 8]));
  end

  assign row_ready = active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vec_r  <= '0;
      cnt    <= '0;
      active <= 1'b0;
      done   <= 1'b0;
      for (int k = 0; k < LOW; k++) vlow[k] <= '0;
    end else begin
      done <= 1'b0;
      if (start && !active) begin
        vec_r  <= vec;
        cnt    <= '0;
        active <= 1'b1;
      end else if (active && row_valid) begin
        vlow[cnt[$clog2(LOW)-1:0]] <= dot;
        cnt <= cnt + 1'b1;
        if (cnt == ($clog2(LOW+1))'(LOW - 1)) begin
          active <= 1'b0;
          done   <= 1'b1;
        end
      end
    end
  end

endmodule
