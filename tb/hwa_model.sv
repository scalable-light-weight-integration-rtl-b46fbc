// Behavioural model of an accelerator (not synthesizable logic of the
// design; the real accelerators are HLS-generated kernels).
//
// It accepts a stream of 128-bit words (one per cycle while in_valid), waits
// LAT cycles after the last one, raises done and offers the same number of
// result words, each the input word plus (ID + 1). idle is high only while
// it holds no task. done stays high until the last result word has been
// taken through out_valid / out_ready.
module hwa_model #(
  parameter int ID      = 0,
  parameter int LAT     = 1,
  parameter int MAXW    = 128
) (
  input  logic         clk,
  input  logic         rst_n,
  output logic         idle,
  output logic         done,
  input  logic         in_valid,
  input  logic [127:0] in_data,
  input  logic         in_last,
  output logic         out_valid,
  output logic [127:0] out_data,
  output logic         out_last,
  input  logic         out_ready
);
  typedef enum logic [1:0] {M_IDLE, M_IN, M_EXEC, M_OUT} st_e;
  st_e          st;
  logic [127:0] buf_q [MAXW];
  int           n, rd, cnt;

  assign idle      = (st == M_IDLE);
  assign done      = (st == M_OUT);
  assign out_valid = (st == M_OUT);
  assign out_data  = buf_q[rd] + 128'(ID + 1);
  assign out_last  = (rd == n - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= M_IDLE; n <= 0; rd <= 0; cnt <= 0;
    end else begin
      case (st)
        M_IDLE, M_IN: if (in_valid) begin
          buf_q[n] <= in_data;
          n        <= n + 1;
          st       <= M_IN;
          if (in_last) begin st <= M_EXEC; cnt <= LAT; end
        end
        M_EXEC: if (cnt <= 1) st <= M_OUT; else cnt <= cnt - 1;
        M_OUT: if (out_ready) begin
          if (rd == n - 1) begin st <= M_IDLE; n <= 0; rd <= 0; end
          else rd <= rd + 1;
        end
        default: st <= M_IDLE;
      endcase
    end
  end
endmodule
