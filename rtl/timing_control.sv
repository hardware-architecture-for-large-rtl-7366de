// Timing and control of the D-ELM chip, with virtual expansion of the hidden
// layer by input rotation (FPGA side).
//
// The host writes one D-pixel image into the image buffer and pulses start.
// The controller then runs the chip num_reruns (E) times.  Rerun r:
//   LOAD   for channel k = 0..D-1 send pixel X[(k - r) mod D] to address k,
//          XW bits MSB first, one bit per cycle with clk_in high;
//   RSTC   one cycle with rn_cnt low (counters and scanner cleared);
//   CONV   neu_en high for conv_cycles cycles;
//   SETTLE two cycles for the last spikes to reach the counters;
//   SCAN   N cycles with clk_out high; each cycle the count on c is sampled
//          and sent out as hidden neuron j = r*N + n.
// Rotating the input by r positions is the same as rotating the rows of the
// random weight matrix by r (W_{r,0}), so E reruns give L = E*N different
// random projections from N physical neurons.  Channels D..D_CH-1 stay at the
// zero they are reset to.
//
// An image takes 2 + E * (D*XW + 1 + conv_cycles + 2 + N) cycles from the edge
// that takes start to the edge that raises done.  The hidden
// stream hid (one word per SCAN cycle, registered, so one cycle behind clk_out)
// carries last on the final neuron of the image; done pulses with that word.
//
// From the paper: the rotation scheme and its direction, E up to 100, D = 126
// pixels on a 128-channel chip, and the pin names.  This design's own choices:
// the phase order, the settle gap and all pin timing.
module timing_control
  import elm_pkg::*;
#(
  parameter int unsigned D     = 126,
  parameter int unsigned D_CH  = 128,
  parameter int unsigned N     = 128,
  parameter int unsigned E_MAX = 100,
  parameter int unsigned XW    = 8,
  parameter int unsigned AW    = $clog2(D_CH),
  parameter int unsigned EW    = $clog2(E_MAX + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // host side
  input  logic          start,
  input  logic [EW-1:0] num_reruns,
  input  logic [15:0]   conv_cycles,
  input  logic          img_we,
  input  logic [AW-1:0] img_addr,
  input  logic [XW-1:0] img_data,
  output logic          busy,
  output logic          done,
  // chip pins
  output logic          rn_in,
  output logic          clk_in,
  output logic          data_in,
  output logic [AW-1:0] a,
  output logic          rn_cnt,
  output logic          neu_en,
  output logic          clk_out,
  input  logic [CW-1:0] c,
  // hidden-count stream
  output hid_t          hid
);

  typedef enum logic [2:0] {S_IDLE, S_RSTIN, S_LOAD, S_RSTC, S_CONV, S_SETTLE, S_SCAN} state_e;

  localparam int unsigned NW = $clog2(N);
  localparam int unsigned BW = (XW > 1) ? $clog2(XW) : 1;

  state_e           state;
  logic [XW-1:0]    img [D];
  logic [EW-1:0]    r, e_reg;
  logic [AW-1:0]    ch;        // destination channel
  logic [AW-1:0]    src;       // source pixel (ch - r) mod D
  logic [AW-1:0]    src0;      // source pixel of channel 0 for the current rerun
  logic [BW-1:0]    bitn;      // bit being sent, MSB first
  logic [15:0]      tcnt;
  logic [NW:0]      n;
  logic [IDX_W-1:0] jbase;
  logic [XW-1:0]    pix;

  always_ff @(posedge clk) begin
    if (img_we && int'(img_addr) < D) img[img_addr] <= img_data;
  end

  assign pix = img[src];

  always_comb begin
    rn_in   = !(state == S_RSTIN);
    clk_in  = (state == S_LOAD);
    data_in = (state == S_LOAD) ? pix[bitn] : 1'b0;
    a       = ch;
    rn_cnt  = !(state == S_RSTC);
    neu_en  = (state == S_CONV);
    clk_out = (state == S_SCAN);
    busy    = (state != S_IDLE);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      r     <= '0;
      e_reg <= '0;
      ch    <= '0;
      src   <= '0;
      src0  <= '0;
      bitn  <= '0;
      tcnt  <= '0;
      n     <= '0;
      jbase <= '0;
      hid   <= '0;
      done  <= 1'b0;
    end else begin
      hid  <= '0;
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          e_reg <= (num_reruns == '0) ? EW'(1) : (num_reruns > EW'(E_MAX)) ? EW'(E_MAX) : num_reruns;
          r     <= '0;
          jbase <= '0;
          state <= S_RSTIN;
        end
        S_RSTIN: begin
          ch    <= '0;
          src   <= '0;
          src0  <= '0;
          bitn  <= BW'(XW - 1);
          state <= S_LOAD;
        end
        S_LOAD: begin
          if (bitn == '0) begin
            bitn <= BW'(XW - 1);
            if (int'(ch) == D - 1) begin
              state <= S_RSTC;
            end else begin
              ch  <= ch + 1'b1;
              src <= (int'(src) == D - 1) ? '0 : src + 1'b1;
            end
          end else begin
            bitn <= bitn - 1'b1;
          end
        end
        S_RSTC: begin
          tcnt  <= conv_cycles;
          state <= (conv_cycles == '0) ? S_SETTLE : S_CONV;
          if (conv_cycles == '0) tcnt <= 16'd2;
        end
        S_CONV: begin
          if (tcnt == 16'd1) begin
            tcnt  <= 16'd2;
            state <= S_SETTLE;
          end else begin
            tcnt <= tcnt - 1'b1;
          end
        end
        S_SETTLE: begin
          if (tcnt == 16'd1) begin
            n     <= '0;
            state <= S_SCAN;
          end else begin
            tcnt <= tcnt - 1'b1;
          end
        end
        S_SCAN: begin
          hid.valid <= 1'b1;
          hid.idx   <= jbase + IDX_W'(n);
          hid.count <= c;
          hid.last  <= (r == e_reg - 1'b1) && (int'(n) == N - 1);
          if (int'(n) == N - 1) begin
            jbase <= jbase + IDX_W'(N);
            if (r == e_reg - 1'b1) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              r     <= r + 1'b1;
              // next rerun: channel 0 takes pixel (0 - (r+1)) mod D
              src0  <= (src0 == '0) ? AW'(D - 1) : src0 - 1'b1;
              src   <= (src0 == '0) ? AW'(D - 1) : src0 - 1'b1;
              ch    <= '0;
              bitn  <= BW'(XW - 1);
              state <= S_LOAD;
            end
          end else begin
            n <= n + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
