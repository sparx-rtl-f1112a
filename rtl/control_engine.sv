// Control engine: sequences one inference for one custom instruction.
//
// On start it latches the mode (func3 = abc), the authentication fields and
// the input base address.  An asserted invalid_id denies the request at
// once.  In the secure modes (a = 1) it strobes the signature verifier and
// denies the request unless access is granted.  It then runs:
//   CONV  for each tile of N consecutive output pixels: KCONV feed cycles
//         (k = 0..KCONV-1, clr on k = 0), LAT cycles for the array to
//         settle, then N*N drain cycles that pass each accumulator through
//         batch norm and ReLU into the activation buffer (index r*N + c:
//         channel r, pixel pix0 + c; pixels beyond the map are not written);
//   POOL  one 2x2 window per cycle, activation buffer -> pooled buffer;
//   FC    for tiles n0 = 0, N: NPOOL feed cycles, LAT settle cycles and one
//         capture cycle for the class scores of that tile;
//   ARGMAX one cycle (result_valid to the privacy logic), one cycle for the
//         privacy output, then done for one cycle.
// Denied requests raise done with denied set (1 cycle after start for an
// invalid ID, 3 for a failed signature).  done comes
//   (a ? 2 : 0) + T*(KCONV + LAT + N*N) + NPOOL + 2*(NPOOL + LAT + 1) + 3
// cycles after the cycle in which start is accepted
// with T = H*H/N tiles and LAT = 2N (the array latency).  MNIST: H = 28, KCONV = 9,
// NPOOL = 1568; CIFAR-10: H = 32, KCONV = 27, NPOOL = 2048.
// The unit list and the mode bits follow the paper; the network, this
// schedule and the timing are this design's choices.
module control_engine
  import sparx_pkg::*;
#(
  parameter int unsigned N = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  mode_t         mode,
  input  auth_fields_t  fields,
  input  logic [11:0]   base,
  input  logic          invalid_id,
  input  logic          grant,
  input  logic          sec_out_valid,
  output ce_state_e     state,
  output mode_t         mode_r,
  output auth_fields_t  fields_r,
  output logic [11:0]   base_r,
  output logic          busy,
  output logic          verify,
  // systolic array feed
  output logic          arr_valid,
  output logic          arr_clr,
  output logic          fc_phase,
  output logic [11:0]   k,
  output logic [11:0]   pix0,
  output logic [3:0]    n0,
  // conv drain
  output logic [2:0]    drain_r,
  output logic [2:0]    drain_c,
  output logic          act_we,
  output logic [12:0]   act_waddr,
  // pooling
  output logic [3:0][12:0] pool_raddr,
  output logic          pool_we,
  output logic [10:0]   pool_waddr,
  // FC capture, argmax, completion
  output logic          fc_capture,
  output logic          result_valid,
  output logic          done,
  output logic          denied
);
  localparam int unsigned LAT = 2*N;

  logic [11:0] npix, kconv, npool;
  logic [5:0]  h;
  logic [4:0]  h2;
  always_comb begin
    npix  = mode_r.cifar ? 12'd1024 : 12'd784;
    h     = mode_r.cifar ? 6'd32 : 6'd28;
    h2    = mode_r.cifar ? 5'd16 : 5'd14;
    kconv = mode_r.cifar ? 12'd27 : 12'd9;
    npool = mode_r.cifar ? 12'd2048 : 12'd1568;
  end

  logic [4:0]  wcnt;
  logic [5:0]  dr;
  logic [2:0]  pch;
  logic [4:0]  py, px;

  assign drain_r = dr[5:3];
  assign drain_c = dr[2:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      mode_r <= '0; fields_r <= '0; base_r <= '0;
      k <= '0; pix0 <= '0; n0 <= '0; wcnt <= '0; dr <= '0;
      pch <= '0; py <= '0; px <= '0; pool_waddr <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          mode_r <= mode; fields_r <= fields; base_r <= base;
          k <= '0; pix0 <= '0; n0 <= '0; wcnt <= '0; dr <= '0;
          pch <= '0; py <= '0; px <= '0; pool_waddr <= '0;
          if (invalid_id)        state <= S_DENY;
          else if (mode.privacy) state <= S_VERIFY;
          else                   state <= S_CONV_FEED;
        end
        S_VERIFY: state <= S_AUTH;
        S_AUTH:   state <= grant ? S_CONV_FEED : S_DENY;
        S_CONV_FEED: begin
          if (k == kconv - 1) begin k <= '0; wcnt <= '0; state <= S_CONV_WAIT; end
          else k <= k + 1;
        end
        S_CONV_WAIT: begin
          if (wcnt == 5'(LAT - 1)) begin dr <= '0; state <= S_CONV_DRAIN; end
          else wcnt <= wcnt + 1;
        end
        S_CONV_DRAIN: begin
          dr <= dr + 1;
          if (dr == 6'(N*N - 1)) begin
            if (pix0 + 12'(N) >= npix) state <= S_POOL;
            else begin pix0 <= pix0 + 12'(N); state <= S_CONV_FEED; end
          end
        end
        S_POOL: begin
          pool_waddr <= pool_waddr + 1;
          if (px == h2 - 1) begin
            px <= '0;
            if (py == h2 - 1) begin
              py <= '0;
              pch <= pch + 1;
              if (pch == 3'(COUT - 1)) begin k <= '0; n0 <= '0; state <= S_FC_FEED; end
            end else py <= py + 1;
          end else px <= px + 1;
        end
        S_FC_FEED: begin
          if (k == npool - 1) begin k <= '0; wcnt <= '0; state <= S_FC_WAIT; end
          else k <= k + 1;
        end
        S_FC_WAIT: begin
          if (wcnt == 5'(LAT - 1)) state <= S_FC_DRAIN;
          else wcnt <= wcnt + 1;
        end
        S_FC_DRAIN: begin
          if (32'(n0) + N >= NCLS) state <= S_ARGMAX;
          else begin n0 <= n0 + 4'(N); state <= S_FC_FEED; end
        end
        S_ARGMAX: state <= S_RESULT;
        S_RESULT: if (sec_out_valid) state <= S_DONE;
        S_DONE:   state <= S_IDLE;
        S_DENY:   state <= S_IDLE;
        default:  state <= S_IDLE;
      endcase
    end
  end

  logic [12:0] prow;
  always_comb begin
    busy         = (state != S_IDLE);
    verify       = (state == S_VERIFY);
    arr_valid    = (state == S_CONV_FEED) || (state == S_FC_FEED);
    arr_clr      = arr_valid && (k == '0);
    fc_phase     = (state == S_FC_FEED) || (state == S_FC_WAIT) || (state == S_FC_DRAIN);
    act_we       = (state == S_CONV_DRAIN) && ((pix0 + 12'(drain_c)) < npix);
    act_waddr    = 13'(32'(drain_r) * 32'(npix) + 32'(pix0) + 32'(drain_c));
    prow         = 13'(32'(pch) * 32'(npix) + 32'(py) * 2 * 32'(h) + 32'(px) * 2);
    pool_raddr[0] = prow;
    pool_raddr[1] = prow + 13'd1;
    pool_raddr[2] = prow + 13'(h);
    pool_raddr[3] = prow + 13'(h) + 13'd1;
    pool_we      = (state == S_POOL);
    fc_capture   = (state == S_FC_DRAIN);
    result_valid = (state == S_ARGMAX);
    done         = (state == S_DONE) || (state == S_DENY);
    denied       = (state == S_DENY);
  end
endmodule
