// tb_cfg_pkg -- bitstream assembly helpers for the testbenches. They place fields
// into a tile configuration word following the documented layout in
// ecologic_pkg (truth table, source selects, output select, connection-block and
// switch-block selects), so that tests can describe a circuit as "BLE j computes
// truth table T of sources a,b,c,d" and routing as "east track t takes source s".
package tb_cfg_pkg;
  import ecologic_pkg::*;

  // switch-block source codes
  function automatic int sb_west(int t);  return t;         endfunction
  function automatic int sb_south(int t); return W + t;     endfunction
  function automatic int sb_clb(int j);   return 2 * W + j; endfunction
  // BLE source codes
  function automatic int src_pin(int p);  return p;         endfunction
  function automatic int src_fb(int j);   return I + j;     endfunction
  // switch-block output numbers
  function automatic int sb_east(int t);  return t;         endfunction
  function automatic int sb_north(int t); return W + t;     endfunction

  function automatic tile_cfg_t put(tile_cfg_t c, int ofs, int w, int val);
    for (int b = 0; b < w; b++) c[ofs + b] = val[b];
    return c;
  endfunction

  // BLE j: truth table, its K sources (unused inputs: pass -1 -> code NSRC = 0),
  // and registered (1) or combinational (0) output
  function automatic tile_cfg_t set_ble(tile_cfg_t c, int j, int truth,
                                        int s0, int s1, int s2, int s3, bit registered);
    int base = j * BLE_BITS;
    int s[4] = '{s0, s1, s2, s3};
    c = put(c, base, LUT_BITS, truth);
    for (int k = 0; k < K; k++)
      c = put(c, base + LUT_BITS + k * SRC_SELW, SRC_SELW, (s[k] < 0) ? NSRC : s[k]);
    c = put(c, base + LUT_BITS + K * SRC_SELW, 1, int'(registered));
    return c;
  endfunction

  function automatic tile_cfg_t set_cbh(tile_cfg_t c, int pin, int track);
    return put(c, OFS_CBH + pin * CB_SELW, CB_SELW, track);
  endfunction
  function automatic tile_cfg_t set_cbv(tile_cfg_t c, int pin, int track);
    return put(c, OFS_CBV + (pin - CB_PINS) * CB_SELW, CB_SELW, track);
  endfunction
  function automatic tile_cfg_t set_sb(tile_cfg_t c, int out, int src);
    return put(c, OFS_SB + out * SB_SELW, SB_SELW, src);
  endfunction
  // an all-zero switch block would copy west track 0 everywhere; "off" drives 0
  function automatic tile_cfg_t sb_all_off(tile_cfg_t c);
    for (int o = 0; o < 2 * W; o++) c = set_sb(c, o, SB_NSRC);
    return c;
  endfunction
  // pass all W tracks straight on west->east and south->north
  function automatic tile_cfg_t sb_pass(tile_cfg_t c);
    for (int t = 0; t < W; t++) begin
      c = set_sb(c, sb_east(t), sb_west(t));
      c = set_sb(c, sb_north(t), sb_south(t));
    end
    return c;
  endfunction

  // truth tables over inputs (i0 = bit 0 of the LUT index)
  function automatic int tt(int f);  // f selects a named function
    int r = 0;
    for (int v = 0; v < 16; v++) begin
      bit a = v[0], b = v[1], cc = v[2], d = v[3], o;
      case (f)
        0: o = a ^ b ^ cc;                       // XOR3 (full-adder sum)
        1: o = (a & b) | (a & cc) | (b & cc);    // MAJ3 (full-adder carry)
        2: o = ~a;                               // NOT
        3: o = a ^ b;                            // XOR2
        4: o = a ^ (b & cc);                     // toggle if b&c
        5: o = a ^ (b & cc & d);                 // toggle if b&c&d
        6: o = a & b;                            // AND2
        7: o = a | b;                            // OR2
        default: o = a;                          // BUF
      endcase
      r[v] = o;
    end
    return r;
  endfunction

  // ---------------- whole-fabric bitstreams ----------------
  typedef logic [NTILES-1:0][TILE_BITS-1:0]  fab_cfg_t;
  typedef logic [NFRAMES-1:0][FRAME_W-1:0]   frames_t;

  // every tile passes its channels straight on: fab_out equals fab_in bit for bit
  function automatic fab_cfg_t fabric_pass();
    fab_cfg_t f;
    for (int t = 0; t < NTILES; t++) f[t] = sb_pass('0);
    return f;
  endfunction

  // full adder in tile (r,c): a, b, cin on west tracks 0,1,2 of row r;
  // sum leaves on east track 0 of row r, carry on north track 0 of column c
  function automatic fab_cfg_t place_adder(fab_cfg_t f, int r, int c);
    tile_cfg_t t = sb_pass('0);
    t = set_cbh(t, 0, 0); t = set_cbh(t, 1, 1); t = set_cbh(t, 2, 2);
    t = set_ble(t, 0, tt(0), src_pin(0), src_pin(1), src_pin(2), -1, 0);
    t = set_ble(t, 1, tt(1), src_pin(0), src_pin(1), src_pin(2), -1, 0);
    t = set_sb(t, sb_east(0), sb_clb(0));
    t = set_sb(t, sb_north(0), sb_clb(1));
    f[r * COLS + c] = t;
    return f;
  endfunction

  // 4-bit free-running counter in tile (r,c), bit t on east track t of row r
  function automatic fab_cfg_t place_counter(fab_cfg_t f, int r, int c);
    tile_cfg_t t = sb_pass('0);
    t = set_ble(t, 0, tt(2), src_fb(0), -1, -1, -1, 1);
    t = set_ble(t, 1, tt(3), src_fb(1), src_fb(0), -1, -1, 1);
    t = set_ble(t, 2, tt(4), src_fb(2), src_fb(1), src_fb(0), -1, 1);
    t = set_ble(t, 3, tt(5), src_fb(3), src_fb(2), src_fb(1), src_fb(0), 1);
    for (int k = 0; k < W; k++) t = set_sb(t, sb_east(k), sb_clb(k));
    f[r * COLS + c] = t;
    return f;
  endfunction

  // frame image of a fabric configuration (tile t at frame t*FRAMES_PER_TILE)
  function automatic frames_t to_frames(fab_cfg_t f);
    logic [NFRAMES*FRAME_W-1:0] flat = '0;
    for (int t = 0; t < NTILES; t++)
      flat[t * FRAMES_PER_TILE * FRAME_W +: TILE_BITS] = f[t];
    return flat;
  endfunction
endpackage
