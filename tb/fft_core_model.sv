// fft_core_model - behavioural model of an N-point complex FFT core, for
// simulation only (the real part is a vendor FFT core).
//
// It computes X(k) = 1/N * sum_n x(n) exp(-j 2 pi n k / N) in double
// precision and rounds to FFT_W-bit two's complement (saturating). Protocol,
// as the engine expects it: in_ready is high while the core can take a frame;
// the frame is N consecutive in_valid beats. The core then computes for
// COMPUTE cycles and emits the N results in natural order (out_idx = k), one
// per clock. It takes no new frame until the last result is out, so with
// COMPUTE = N a frame occupies the core for 3N clocks: 3 clocks per point.
// clear abandons the frame in progress.
//
// The transform and its 1/N scaling, and the 3 clocks per point, follow the
// source's description of the vendor core; the handshake and the rounding
// are this design's own.
module fft_core_model #(
  parameter int unsigned N       = 256,
  parameter int unsigned FFT_W   = 16,
  parameter int unsigned COMPUTE = N
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clear,
  output logic                      in_ready,
  input  logic                      in_valid,
  input  logic signed [FFT_W-1:0]   in_re,
  input  logic signed [FFT_W-1:0]   in_im,
  output logic                      out_valid,
  output logic [$clog2(N)-1:0]      out_idx,
  output logic signed [FFT_W-1:0]   out_re,
  output logic signed [FFT_W-1:0]   out_im
);

  typedef enum logic [1:0] {IDLE, LOAD, CALC, UNLOAD} state_e;
  state_e state;
  int     cnt;
  real    xr [N], xi [N];
  logic signed [FFT_W-1:0] yr [N], yi [N];

  function automatic logic signed [FFT_W-1:0] q(input real v);
    real r;
    r = (v >= 0.0) ? v + 0.5 : v - 0.5;
    if (r >  real'((1 << (FFT_W-1)) - 1)) return FFT_W'((1 << (FFT_W-1)) - 1);
    if (r < -real'(1 << (FFT_W-1)))       return FFT_W'(-(1 << (FFT_W-1)));
    return FFT_W'($rtoi(r));
  endfunction

  task automatic transform();
    real sr, si, a;
    for (int k = 0; k < N; k++) begin
      sr = 0.0; si = 0.0;
      for (int n = 0; n < N; n++) begin
        a  = -2.0 * 3.14159265358979323846 * real'((n * k) % N) / real'(N);
        sr += xr[n] * $cos(a) - xi[n] * $sin(a);
        si += xr[n] * $sin(a) + xi[n] * $cos(a);
      end
      yr[k] = q(sr / real'(N));
      yi[k] = q(si / real'(N));
    end
  endtask

  assign in_ready = (state == IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= IDLE;
      cnt       <= 0;
      out_valid <= 1'b0;
      out_idx   <= '0;
      out_re    <= '0;
      out_im    <= '0;
    end else if (clear) begin
      state     <= IDLE;
      cnt       <= 0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      case (state)
        IDLE, LOAD: if (in_valid) begin
          xr[cnt] = real'(in_re);
          xi[cnt] = real'(in_im);
          if (cnt == N - 1) begin
            transform();
            state <= CALC;
            cnt   <= 0;
          end else begin
            state <= LOAD;
            cnt   <= cnt + 1;
          end
        end
        CALC: begin
          if (cnt >= int'(COMPUTE) - 1) begin
            state <= UNLOAD;
            cnt   <= 0;
          end else cnt <= cnt + 1;
        end
        UNLOAD: begin
          out_valid <= 1'b1;
          out_idx   <= cnt[$clog2(N)-1:0];
          out_re    <= yr[cnt];
          out_im    <= yi[cnt];
          if (cnt == N - 1) begin
            state <= IDLE;
            cnt   <= 0;
          end else cnt <= cnt + 1;
        end
        default: state <= IDLE;
      endcase
    end
  end

endmodule
