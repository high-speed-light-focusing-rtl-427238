// optics_model: behavioural stand-in for the DMD controller, the scattering
// medium and the photodetector. It collects the 128-bit words streamed to
// the DMD into a frame; on dmd_show the frame becomes the displayed mask.
// The medium is a fixed random transmission vector: mode m (a 16x12-pixel
// block) contributes a complex field (wr[m], wi[m]) with components uniform
// in -127..127 when it is on. The detector level is the intensity
// |sum of on-mode fields|^2 divided by DIV and clipped to 0..1023, with DIV
// set so that a random mask gives a level near 8. The model also counts
// words that break the rule that a mode is uniform over its pixels.
module optics_model #(
  parameter int ROWS = 768,
  parameter int WPR  = 8,
  parameter int SEGR = 12,
  parameter int MPIX = 16,
  parameter int RW   = $clog2(ROWS)
) (
  input  logic          clk,
  input  logic          dmd_dvalid,
  input  logic [127:0]  dmd_data,
  input  logic [RW-1:0] dmd_row,
  input  logic          dmd_show,
  output int            level,
  output int            frames,
  output int            nonuniform
);
  localparam int MR = ROWS / SEGR, MC = WPR * 128 / MPIX, NM = MR * MC;
  logic [127:0] frame   [ROWS * WPR];
  logic [127:0] shown   [ROWS * WPR];
  int           wr [NM], wi [NM];
  int           col = 0;
  longint       div;

  function automatic longint intensity();
    longint re, im;
    re = 0; im = 0;
    for (int m = 0; m < NM; m++)
      if (shown[(m / MC) * SEGR * WPR + (m % MC) / (128 / MPIX)][((m % MC) % (128 / MPIX)) * MPIX]) begin
        re += wr[m]; im += wi[m];
      end
    return re * re + im * im;
  endfunction

  initial begin
    for (int m = 0; m < NM; m++) begin
      wr[m] = int'($urandom % 255) - 127;
      wi[m] = int'($urandom % 255) - 127;
    end
    div = longint'(NM) * 672;
    level = 0; frames = 0; nonuniform = 0;
  end

  always @(posedge clk) begin
    longint lv;
    if (dmd_dvalid) begin
      int a;
      a = int'(dmd_row) * WPR + col;
      frame[a] = dmd_data;
      for (int j = 0; j < 128 / MPIX; j++)
        if (dmd_data[j*MPIX +: MPIX] != {MPIX{dmd_data[j*MPIX]}} ||
            dmd_data[j*MPIX] != frame[(int'(dmd_row) - int'(dmd_row) % SEGR) * WPR + col][j*MPIX])
          nonuniform++;
      col = (col == WPR - 1) ? 0 : col + 1;
    end
    if (dmd_show) begin
      shown = frame;
      lv = intensity() / div;
      level <= (lv > 1023) ? 1023 : int'(lv);
      frames <= frames + 1;
    end
  end

  function automatic logic [127:0] shown_word(int a);
    return shown[a];
  endfunction
endmodule
