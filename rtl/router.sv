// router: six-port wormhole router of the 2D-mesh network-on-chip.
//
// Ports E, S, W, N lead to the four neighbouring cores, FE and BE to the FP
// and BP sub-cores of the own core. Every input port has two virtual-channel
// buffers (BW stage, VC0/VC1). The flit at the front of a buffer gets its
// output port by route computation (RC): dimension-ordered XY routing on the
// destination carried in the head flit (x first, then y; N is y-1, S is y+1;
// at the destination the sub-core bit picks FE or BE). Switch allocation (SA)
// gives each output, per cycle, to one of the twelve input VCs that want it,
// round robin; a head flit claims the output VC until its tail passes, so
// packets on the same VC never interleave, while the two VCs share the link
// flit by flit. Switch traversal (ST) is the output register. RC and SA take
// one cycle together and ST one more, so a hop costs two cycles.
// Flow control: in_ready[p][v] is high while the VC buffer has at least two
// free slots, which covers the flit in the upstream ST register; a flit keeps
// its VC along the whole path. Routing, VC and flow-control rules are this
// design's own choices; the port set, the two VCs and the BW/RC/SA/ST stages
// follow the router's block diagram.
module router
  import snn_pkg::*;
#(
  parameter int DEPTH = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [2:0]              my_x,
  input  logic [2:0]              my_y,
  input  logic [NPORT-1:0]        in_valid,
  input  flit_t                   in_flit  [NPORT],
  output logic [NPORT-1:0][1:0]   in_ready,
  output logic [NPORT-1:0]        out_valid,
  output flit_t                   out_flit [NPORT],
  input  logic [NPORT-1:0][1:0]   out_ready
);

  localparam int NIN = NPORT * 2;
  localparam int PW = $clog2(DEPTH);

  flit_t       fifo  [NPORT][2][DEPTH];
  logic [PW-1:0] rp  [NPORT][2];
  logic [PW-1:0] wp  [NPORT][2];
  logic [PW:0]   cnt [NPORT][2];
  logic [2:0]  route_q [NPORT][2];
  logic [2:0]  route   [NIN];
  logic        elig    [NIN];
  flit_t       front   [NIN];
  logic        lock_v  [NPORT][2];
  logic [3:0]  lock_in [NPORT][2];
  logic [3:0]  rr      [NPORT];
  logic [NIN-1:0] deq;
  logic [3:0]  win     [NPORT];
  logic        win_v   [NPORT];

  function automatic logic [2:0] xy(head_t h);
    if (h.dst_x > my_x)      return 3'(P_E);
    else if (h.dst_x < my_x) return 3'(P_W);
    else if (h.dst_y > my_y) return 3'(P_S);
    else if (h.dst_y < my_y) return 3'(P_N);
    else                     return h.dst_sub ? 3'(P_BE) : 3'(P_FE);
  endfunction

  // RC + eligibility
  always_comb begin
    for (int i = 0; i < NIN; i++) begin
      int p, v;
      logic is_head;
      p = i / 2; v = i % 2;
      front[i] = fifo[p][v][rp[p][v]];
      is_head  = (front[i].kind == FL_HEAD) || (front[i].kind == FL_SINGLE);
      route[i] = is_head ? xy(head_t'(front[i].data[HEADW-1:0])) : route_q[p][v];
      elig[i]  = (cnt[p][v] != '0) && out_ready[route[i]][v] &&
                 (is_head ? !lock_v[route[i]][v] : (lock_v[route[i]][v] && lock_in[route[i]][v] == 4'(p)));
    end
  end

  // SA: round robin per output
  always_comb begin
    deq = '0;
    for (int o = 0; o < NPORT; o++) begin
      win_v[o] = 1'b0;
      win[o]   = '0;
      for (int k = 0; k < NIN; k++) begin
        int i;
        i = (int'(rr[o]) + k) % NIN;
        if (!win_v[o] && elig[i] && route[i] == 3'(o)) begin
          win_v[o] = 1'b1;
          win[o]   = 4'(i);
        end
      end
      if (win_v[o]) deq[win[o]] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NPORT; p++) begin
        for (int v = 0; v < 2; v++) begin
          rp[p][v] <= '0; wp[p][v] <= '0; cnt[p][v] <= '0; route_q[p][v] <= '0;
          lock_v[p][v] <= 1'b0; lock_in[p][v] <= '0;
        end
        rr[p] <= '0;
        out_valid[p] <= 1'b0;
        out_flit[p] <= '0;
      end
    end else begin
      // BW: enqueue
      for (int p = 0; p < NPORT; p++) begin
        if (in_valid[p]) begin
          fifo[p][in_flit[p].vc][wp[p][in_flit[p].vc]] <= in_flit[p];
          wp[p][in_flit[p].vc] <= wp[p][in_flit[p].vc] + 1'b1;
        end
      end
      // dequeue and counts
      for (int i = 0; i < NIN; i++) begin
        int p, v;
        p = i / 2; v = i % 2;
        if (deq[i]) begin
          rp[p][v] <= rp[p][v] + 1'b1;
          route_q[p][v] <= route[i];
        end
        cnt[p][v] <= cnt[p][v] + (PW+1)'(in_valid[p] && in_flit[p].vc == 1'(v)) - (PW+1)'(deq[i]);
      end
      // ST and VC locks
      for (int o = 0; o < NPORT; o++) begin
        out_valid[o] <= win_v[o];
        if (win_v[o]) begin
          flit_t f;
          f = front[win[o]];
          out_flit[o] <= f;
          rr[o] <= 4'((int'(win[o]) + 1) % NIN);
          if (f.kind == FL_HEAD) begin
            lock_v[o][f.vc] <= 1'b1; lock_in[o][f.vc] <= 4'(int'(win[o]) / 2);
          end else if (f.kind == FL_TAIL) begin
            lock_v[o][f.vc] <= 1'b0;
          end
        end
      end
    end
  end

  always_comb
    for (int p = 0; p < NPORT; p++)
      for (int v = 0; v < 2; v++) in_ready[p][v] = (cnt[p][v] <= (PW+1)'(DEPTH - 2));

endmodule
