// crossbar_ctrl -- control of one QUBO computation in the crossbar (the SL/DL,
// WL and output control blocks).
//
// The M bit columns of every subarray share the subarray's single ADC through a
// multiplexer, so a computation converts the bit columns one per cycle, LSB
// first, in all N subarrays at once. The ADC code of a column is registered, so
// the shift-add of bit b happens one cycle after its conversion. When the last
// column has been accumulated, the output buffer is loaded with the sum over the
// subarrays and done is raised.
//
// Sequence (start in IDLE at cycle t): acc_clr at t; CONV b = 0..M-1 at t+1..t+M
// (inputs applied, bit_sel = b, adc_sample, and accumulation of bit b-1); LAST at
// t+M+1 (accumulate bit M-1); SUM at t+M+2 (out_load); DONE at t+M+3 (done).
// Bit-serial conversion through MUX_i into ADC_i follows the paper's figure; the
// exact cycle plan is this design's own.
module crossbar_ctrl #(
  parameter int unsigned M = 7
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic                 busy,
  output logic                 array_en,
  output logic [$clog2(M)-1:0] bit_sel,
  output logic                 adc_sample,
  output logic                 acc_clr,
  output logic                 acc_en,
  output logic [$clog2(M)-1:0] acc_shift,
  output logic                 out_load,
  output logic                 done
);

  typedef enum logic [2:0] {XB_IDLE, XB_CONV, XB_LAST, XB_SUM, XB_DONE} xb_state_t;

  localparam int unsigned BW = $clog2(M);
  localparam logic [BW-1:0] BMAX = BW'(M - 1);

  xb_state_t      state;
  logic [BW-1:0]  b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= XB_IDLE;
      b     <= '0;
    end else begin
      unique case (state)
        XB_IDLE: if (start) begin state <= XB_CONV; b <= '0; end
        XB_CONV: if (b == BMAX) state <= XB_LAST;
                 else           b <= b + 1'b1;
        XB_LAST: state <= XB_SUM;
        XB_SUM:  state <= XB_DONE;
        XB_DONE: state <= XB_IDLE;
        default: state <= XB_IDLE;
      endcase
    end
  end

  always_comb begin
    busy       = (state != XB_IDLE);
    acc_clr    = (state == XB_IDLE) && start;
    array_en   = (state == XB_CONV);
    adc_sample = (state == XB_CONV);
    bit_sel    = b;
    acc_en     = ((state == XB_CONV) && b != '0) || (state == XB_LAST);
    acc_shift  = (state == XB_LAST) ? BMAX : b - 1'b1;
    out_load   = (state == XB_SUM);
    done       = (state == XB_DONE);
  end

endmodule
