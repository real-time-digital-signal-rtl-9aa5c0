// cfd_width: pulse window by an 8 percent constant-fraction threshold.
//
// The threshold is CFD_PERCENT of the peak value. Starting at the peak the
// unit walks backwards one sample per clock while the next sample down is at
// or above the threshold, which gives the window start N0; it then walks
// forwards from the peak in the same way to the window end N. The width is
// N - N0 in samples (13.3 ns each at 75 MHz). Timing: one clock to load, one
// clock per step in each direction, plus one clock between the two walks, so
// start to done is (peak-N0) + (N-peak) + 3 clocks.
//
// The 8 percent fraction and the walk outward from the peak follow the paper.
// Taking N0 and N as the outermost samples still at or above the threshold,
// and computing the threshold as floor(peak * round(CFD_PERCENT*2^16/100) /
// 2^16), are this design's choices.
module cfd_width
  import psd_pkg::*;
#(
  parameter int unsigned ADDR_W      = 10,
  parameter int unsigned CFD_PERCENT = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W:0]   len,
  input  sample_t           peak_val,
  input  logic [ADDR_W-1:0] peak_addr,
  output logic [ADDR_W-1:0] raddr,
  input  sample_t           rdata,
  output logic [ADDR_W-1:0] n0,
  output logic [ADDR_W-1:0] n1,
  output logic [15:0]       width,
  output logic              done
);
  localparam logic [16:0] FRAC = 17'((CFD_PERCENT * 65536 + 50) / 100);

  typedef enum logic [1:0] {S_IDLE, S_BACK, S_FWD} state_t;
  state_t state;

  sample_t            thr;
  logic signed [33:0] prod;
  logic [ADDR_W-1:0]  pos;
  logic [ADDR_W-1:0]  last;

  assign prod  = peak_val * $signed({1'b0, FRAC});
  assign last  = ADDR_W'(len - 1'b1);
  assign width = 16'(n1 - n0);

  always_comb begin
    unique case (state)
      S_BACK:  raddr = pos - 1'b1;
      S_FWD:   raddr = pos + 1'b1;
      default: raddr = pos;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      thr   <= '0;
      pos   <= '0;
      n0    <= '0;
      n1    <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          thr   <= sample_t'(prod >>> 16);
          pos   <= peak_addr;
          state <= S_BACK;
        end
        S_BACK: begin
          if (pos != '0 && rdata >= thr) begin
            pos <= pos - 1'b1;
          end else begin
            n0    <= pos;
            pos   <= peak_addr;
            state <= S_FWD;
          end
        end
        S_FWD: begin
          if (pos != last && rdata >= thr) begin
            pos <= pos + 1'b1;
          end else begin
            n1    <= pos;
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
