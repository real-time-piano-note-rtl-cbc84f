// xfft_model: behavioural model of a burst-I/O FFT core (not synthesizable).
//
// Reproduces the single-channel port list and handshake of a Radix-4 Burst
// I/O FFT core closely enough to test the logic around it:
//   load    : a start seen while idle raises rfd on the next clock; on each
//             clock with rfd high, xn_re/xn_im are stored at xn_index, which
//             runs 0..N-1; rfd falls after the last sample.
//   compute : busy is high for PROC_CYCLES clocks; edone is high in the last
//             of them, done pulses in the clock after busy falls.
//   unload  : an unload seen at any time after loading (held if early) starts
//             the read-out UNLOAD_LAT clocks after done; dv is then high for N
//             clocks with xk_index 0..N-1 in natural order.
// The transform is a direct DFT in double precision (forward when fwd_inv is
// 1), scaled by 2^-(sum of the 2-bit fields of scale_sch), rounded and
// saturated to OUT_W bits. `ovflo` reports saturation in the frame.
`timescale 1ns/1ps
module xfft_model #(
  parameter int N           = 512,
  parameter int IN_W        = 14,
  parameter int OUT_W       = 14,
  parameter int SCALE_W     = 10,
  parameter int PROC_CYCLES = 600,
  parameter int UNLOAD_LAT  = 8
) (
  input  logic                        clk,
  input  logic                        start,
  input  logic                        unload,
  input  logic signed [IN_W-1:0]      xn_re,
  input  logic signed [IN_W-1:0]      xn_im,
  input  logic                        fwd_inv,
  input  logic                        fwd_inv_we,
  input  logic [SCALE_W-1:0]          scale_sch,
  input  logic                        scale_sch_we,
  output logic                        rfd,
  output logic                        busy,
  output logic                        edone,
  output logic                        done,
  output logic                        dv,
  output logic [$clog2(N)-1:0]        xn_index,
  output logic [$clog2(N)-1:0]        xk_index,
  output logic signed [OUT_W-1:0]     xk_re,
  output logic signed [OUT_W-1:0]     xk_im,
  output logic                        ovflo
);

  typedef enum int {M_IDLE, M_LOAD, M_BUSY, M_WAITU, M_LAT, M_OUT} mstate_e;

  mstate_e st = M_IDLE;
  real     x_re [N];
  real     x_im [N];
  logic signed [OUT_W-1:0] y_re [N];
  logic signed [OUT_W-1:0] y_im [N];
  logic    fwd = 1'b1;
  logic [SCALE_W-1:0] sch = '0;
  bit      unload_seen = 1'b0;
  int      cnt = 0;
  int      frames = 0;
  bit      configured = 1'b0;

  initial begin
    rfd = 0; busy = 0; edone = 0; done = 0; dv = 0; ovflo = 0;
    xn_index = '0; xk_index = '0; xk_re = '0; xk_im = '0;
  end

  function automatic logic signed [OUT_W-1:0] sat(input real v, inout logic of);
    real lim_hi, lim_lo, r;
    lim_hi = 2.0 ** (OUT_W - 1) - 1.0;
    lim_lo = -(2.0 ** (OUT_W - 1));
    r = (v >= 0.0) ? $floor(v + 0.5) : -$floor(-v + 0.5);
    if (r > lim_hi) begin r = lim_hi; of = 1'b1; end
    if (r < lim_lo) begin r = lim_lo; of = 1'b1; end
    return OUT_W'($rtoi(r));
  endfunction

  task automatic compute();
    real c, s, ar, ai, sc, ang;
    int  sh;
    logic of;
    of = 1'b0;
    sh = 0;
    for (int i = 0; i < SCALE_W / 2; i++) sh += int'(sch[2*i +: 2]);
    sc = 1.0 / (2.0 ** sh);
    for (int k = 0; k < N; k++) begin
      ar = 0.0; ai = 0.0;
      for (int n = 0; n < N; n++) begin
        ang = 2.0 * 3.14159265358979 * real'((n * k) % N) / real'(N);
        c = $cos(ang);
        s = fwd ? -$sin(ang) : $sin(ang);
        ar += x_re[n] * c - x_im[n] * s;
        ai += x_re[n] * s + x_im[n] * c;
      end
      y_re[k] = sat(ar * sc, of);
      y_im[k] = sat(ai * sc, of);
    end
    ovflo = of;
  endtask

  always @(posedge clk) begin
    if (fwd_inv_we)   fwd <= fwd_inv;
    if (scale_sch_we) sch <= scale_sch;
    if (fwd_inv_we || scale_sch_we) configured <= 1'b1;
    edone <= 1'b0;
    done  <= 1'b0;
    if (unload && st != M_IDLE && st != M_LOAD) unload_seen <= 1'b1;
    case (st)
      M_IDLE: if (start) begin
        rfd      <= 1'b1;
        xn_index <= '0;
        st       <= M_LOAD;
      end
      M_LOAD: begin
        x_re[xn_index] = real'(xn_re);
        x_im[xn_index] = real'(xn_im);
        if (xn_index == $clog2(N)'(N - 1)) begin
          rfd  <= 1'b0;
          busy <= 1'b1;
          cnt  <= 1;
          unload_seen <= 1'b0;
          st   <= M_BUSY;
          compute();
        end else begin
          xn_index <= xn_index + 1'b1;
        end
      end
      M_BUSY: begin
        cnt <= cnt + 1;
        if (cnt == PROC_CYCLES - 1) edone <= 1'b1;
        if (cnt == PROC_CYCLES) begin
          busy <= 1'b0;
          done <= 1'b1;
          st   <= M_WAITU;
        end
      end
      M_WAITU: if (unload_seen || unload) begin
        cnt <= 0;
        st  <= M_LAT;
      end
      M_LAT: begin
        cnt <= cnt + 1;
        if (cnt == UNLOAD_LAT - 1) begin
          dv       <= 1'b1;
          xk_index <= '0;
          xk_re    <= y_re[0];
          xk_im    <= y_im[0];
          st       <= M_OUT;
        end
      end
      M_OUT: begin
        if (xk_index == $clog2(N)'(N - 1)) begin
          dv          <= 1'b0;
          unload_seen <= 1'b0;
          frames      <= frames + 1;
          st          <= M_IDLE;
        end else begin
          xk_index <= xk_index + 1'b1;
          xk_re    <= y_re[xk_index + 1'b1];
          xk_im    <= y_im[xk_index + 1'b1];
        end
      end
      default: st <= M_IDLE;
    endcase
  end

endmodule
