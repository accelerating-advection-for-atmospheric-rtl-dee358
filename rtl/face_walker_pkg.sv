// Loop order of a kernel run over the chunked grid, shared by the read and
// write stages so that both walk the grid in exactly the same order.
//
// The grid is split in y into chunks of chunk_w interior columns (the last
// chunk may be narrower). A chunk is processed whole before the next one:
// for each x plane, for each y column of the chunk, the column bottom to
// top. The read stage walks planes 0..nx+1 and columns ylo..yhi, halos
// included, so that neighbouring chunks overlap by two columns; the write
// stage walks only the interior, planes 1..nx and columns ylo+1..yhi-1.
// z advances by `zstep` (eight for whole memory words, one for values).
package face_walker_pkg;
  import adv_pkg::*;

  typedef struct packed {
    idx_t ylo;   // left halo column of the current chunk
    idx_t x;
    idx_t y;
    idx_t z;
  } pos_t;

  // Right halo column of the chunk whose left halo is ylo.
  function automatic idx_t chunk_yhi(input cfg_t cfg, input idx_t ylo);
    idx_t full_end;
    full_end = ylo + cfg.chunk_w + idx_t'(1);
    return (full_end > cfg.ny + idx_t'(1)) ? cfg.ny + idx_t'(1) : full_end;
  endfunction

  // First position; `halo` selects the read walk (halos included).
  function automatic pos_t walk_first(input cfg_t cfg, input logic halo);
    pos_t p;
    p.ylo = '0;
    p.x   = halo ? idx_t'(0) : idx_t'(1);
    p.y   = halo ? idx_t'(0) : idx_t'(1);
    p.z   = '0;
    return p;
  endfunction

  // Is p the final position of the walk?
  function automatic logic walk_is_last(input cfg_t cfg, input logic halo, input idx_t zstep,
                                        input pos_t p);
    idx_t yhi;
    yhi = chunk_yhi(cfg, p.ylo);
    return (p.z + zstep >= cfg.nz) &&
           (p.y == (halo ? yhi : yhi - idx_t'(1))) &&
           (p.x == (halo ? cfg.nx + idx_t'(1) : cfg.nx)) &&
           (yhi == cfg.ny + idx_t'(1));
  endfunction

  function automatic pos_t walk_next(input cfg_t cfg, input logic halo, input idx_t zstep,
                                     input pos_t p);
    pos_t n;
    idx_t yhi;
    n   = p;
    yhi = chunk_yhi(cfg, p.ylo);
    if (p.z + zstep < cfg.nz) begin
      n.z = p.z + zstep;
    end else begin
      n.z = '0;
      if (p.y != (halo ? yhi : yhi - idx_t'(1))) begin
        n.y = p.y + idx_t'(1);
      end else if (p.x != (halo ? cfg.nx + idx_t'(1) : cfg.nx)) begin
        n.x = p.x + idx_t'(1);
        n.y = halo ? p.ylo : p.ylo + idx_t'(1);
      end else begin
        n.ylo = p.ylo + cfg.chunk_w;
        n.x   = halo ? idx_t'(0) : idx_t'(1);
        n.y   = halo ? n.ylo : n.ylo + idx_t'(1);
      end
    end
    return n;
  endfunction

  // Word address of the memory word holding (x, y, z) of an array at base.
  function automatic addr_t word_addr(input cfg_t cfg, input addr_t base, input pos_t p);
    addr_t col, wpc, zw;
    idx_t  ny2, nzw, pzw;
    ny2 = cfg.ny + idx_t'(2);
    nzw = cfg.nz / idx_t'(WORD_DOUBLES);   // words per column
    pzw = p.z / idx_t'(WORD_DOUBLES);
    wpc = addr_t'(nzw);
    zw  = addr_t'(pzw);
    col = addr_t'(p.x) * addr_t'(ny2) + addr_t'(p.y);
    return base + col * wpc + zw;
  endfunction

endpackage
