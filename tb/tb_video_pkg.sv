// tb_video_pkg: synthetic video used by the testbenches. The anchor frame is
// a pseudo-random texture; the current frame is the same texture moved by a
// global motion (GDX, GDY), so the true motion vector of an inner block is
// (GDX, GDY). Pixels are computed, not stored.
package tb_video_pkg;
  function automatic logic [7:0] texture(int x, int y);
    longint h;
    h = (longint'(x) * 73856093) ^ (longint'(y) * 19349663) ^ (longint'(x + y) * 83492791);
    h = h ^ (h >>> 13);
    return 8'(h >>> 5);
  endfunction

  // frame 1 = anchor F_{t-1}, frame 0 = current F_t
  function automatic logic [7:0] pixel(bit frame, int x, int y, int gdx, int gdy);
    return frame ? texture(x, y) : texture(x + gdx, y + gdy);
  endfunction
endpackage
