// src_neuron -- one Spiking Recurrent Cell (SRC) in integer, shift-and-add form.
//
// Per image the cell runs two phases. After a one-cycle `go` it spends N_IN cycles building
// the input current serially, one input per cycle:
//     I[t] = beta*I[t-1] + sum_i W_i * Input_i          (Input_i is a 0/1 spike)
// and then, in one update cycle, applies the simplified SRC equations (all values x1000):
//     z_s[t] = (h[t-1] < 500) ? z_hyp : z_deep
//     x[t]   = I[t] + ((h[t-1] - (h_s[t-1] <<< 2) - 3000) <<< 1)
//     h[t]   = clamp(((x[t] <<< 1) + x[t]) >>> 2, -1024, +1023)
//     h_s[t] = ((z_s[t] * (h_s[t-1] - h[t-1])) >>> 10) + h[t-1]
// `ready` falls on the cycle after `go` and rises again on the cycle after the update, i.e.
// N_IN + 1 clock edges after the `go` edge. `ureset` (the u-RESET side-band bit of the image)
// is sampled with `go`: it clears h, h_s and the carried current before that image is used.
//
// From the source: the equations, the 11-bit h/h_s and 10-bit z_s registers, the clamp at the
// 11-bit register range (the equation text clamps at +/-1000; the hardware listing and
// waveform saturate at 1023), z_hyp supplied from outside (Zmax) and z_deep fixed (Zmin),
// one input per clock (784 cycles per image). This design's own choices: beta is realised as
// 1 - 2^-BETA_SHIFT with BETA_SHIFT = 0 meaning beta = 0 (the value of beta is not given);
// the spike output is h[t] >= 500 (the z_s threshold); reset values are 0.
module src_neuron
  import snn_pkg::*;
#(
  parameter int unsigned N_IN       = 784,  // inputs per neuron
  parameter int unsigned W_BITS     = 9,    // signed weight width
  parameter int unsigned ACC_W      = 32,   // Int32 arithmetic
  parameter int unsigned BETA_SHIFT = 0     // beta = 1 - 2^-BETA_SHIFT (0 -> beta = 0)
) (
  input  logic                     clk,
  input  logic                     rst,                // synchronous, active high
  input  logic                     go,                 // start one image
  input  logic                     ureset,             // u-RESET, sampled with go
  input  logic [N_IN-1:0]          in_vec,             // input spike vector (latched)
  input  logic [W_BITS-1:0]        w_row [N_IN],       // this neuron's weight row (signed)
  input  logic [Z_W-1:0]           zmax,               // z_s^hyp
  output logic                     ready,
  output logic                     spike,              // Spike_O
  output logic signed [H_W-1:0]    h,                  // Fht
  output logic signed [H_W-1:0]    hs,                 // Fhst
  output logic [Z_W-1:0]           z                   // Fz
);

  localparam int unsigned CNT_W = (N_IN > 1) ? $clog2(N_IN) : 1;

  typedef enum logic [1:0] {S_IDLE, S_ACC, S_UPD} state_t;
  state_t state;

  logic [CNT_W-1:0]        cnt;
  logic signed [ACC_W-1:0] acc;     // I[t] under construction
  logic signed [ACC_W-1:0] i_prev;  // I[t-1]

  // carried part of the current: beta * I[t-1]
  logic signed [ACC_W-1:0] i_carry;
  assign i_carry = (BETA_SHIFT == 0) ? '0 : (i_prev - (i_prev >>> BETA_SHIFT));

  // ---------------- update datapath (combinational, used in S_UPD) ----------------
  logic signed [ACC_W-1:0] h_x, hs_x, x, y, d, zd, hs_n;
  logic signed [ACC_W-1:0] z_x;
  logic [Z_W-1:0]          z_n;
  logic signed [H_W-1:0]   h_n;

  always_comb begin
    h_x  = ACC_W'(h);
    hs_x = ACC_W'(hs);
    z_n  = (h_x < V_TH) ? zmax : Z_W'(Z_DEEP);
    z_x  = ACC_W'({1'b0, z_n});
    x    = acc + ((h_x - (hs_x <<< 2) - BIAS) <<< 1);
    y    = ((x <<< 1) + x) >>> 2;
    if (y > H_MAX)      h_n = H_W'(H_MAX);
    else if (y < H_MIN) h_n = H_W'(H_MIN);
    else                h_n = y[H_W-1:0];
    d    = hs_x - h_x;
    zd   = z_x * d;
    hs_n = (zd >>> Z_SHIFT) + h_x;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state  <= S_IDLE;
      cnt    <= '0;
      acc    <= '0;
      i_prev <= '0;
      h      <= '0;
      hs     <= '0;
      z      <= '0;
      spike  <= 1'b0;
      ready  <= 1'b1;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (go) begin
            ready <= 1'b0;
            cnt   <= '0;
            state <= S_ACC;
            if (ureset) begin
              acc    <= '0;
              i_prev <= '0;
              h      <= '0;
              hs     <= '0;
            end else begin
              acc    <= i_carry;
            end
          end
        end
        S_ACC: begin
          if (in_vec[cnt]) acc <= acc + ACC_W'($signed(w_row[cnt]));
          if (cnt == CNT_W'(N_IN - 1)) state <= S_UPD;
          else                         cnt   <= cnt + 1'b1;
        end
        S_UPD: begin
          h      <= h_n;
          hs     <= hs_n[H_W-1:0];
          z      <= z_n;
          spike  <= (ACC_W'(h_n) >= V_TH);
          i_prev <= acc;
          ready  <= 1'b1;
          state  <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
