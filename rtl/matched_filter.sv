// matched_filter: the "matched filter" module of the preprocessing unit,
// y_E = H^H y (the right-hand side of the MMSE system A s = y_E).
//
// It reads the same channel-row stream as the Gram-matrix array: with
// in_valid = 1 it receives row n of H (h = H(n,:)) together with the received
// sample y(n) of BS antenna n, and every user lane i accumulates
// conj(h_i) * y(n). The M multiply-accumulate lanes are one instance of the
// detector's iterative module (y = x + a*b with x fed back), so one row is
// absorbed per cycle.
//
// Interface and timing. start (one cycle) clears the accumulators. done is
// high from the cycle after the N-th accepted row until the next start, and
// y_e is then valid and stable. The paper gives only the function; the
// row-serial schedule is this design's choice.
module matched_filter
  import rbd_pkg::*;
#(
  parameter int unsigned N = 128,
  parameter int unsigned M = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  logic  in_valid,
  input  cplx_t h_row [M],
  input  cplx_t y_n,
  output cplx_t y_e [M],
  output logic  done
);

  localparam int unsigned NW = $clog2(N + 1);

  logic [NW-1:0] cnt;
  it_op_e        op;
  cplx_t         x_in [M];
  cplx_t         a_in [M];
  cplx_t         b_in [M];

  always_comb begin
    for (int i = 0; i < int'(M); i++) begin
      x_in[i] = start ? CZERO : y_e[i];
      a_in[i] = cconj(h_row[i]);
      b_in[i] = y_n;
    end
    if (start)                       op = IT_INIT;
    else if (in_valid && cnt != NW'(N)) op = IT_MAC;
    else                             op = IT_HOLD;
  end

  iterative_module #(.LANES(M)) u_mac (
    .clk, .rst_n, .op, .x(x_in), .a(a_in), .b(b_in), .y(y_e)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
    end else if (start) begin
      cnt <= '0;
    end else if (in_valid && cnt != NW'(N)) begin
      cnt <= cnt + 1'b1;
    end
  end

  assign done = (cnt == NW'(N));

endmodule
