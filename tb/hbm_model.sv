// hbm_model: behavioural model of the HBM2 global memory seen through
// PORTS AXI4 slave ports (testbench only, not synthesizable).
//
// Each port is an independent memory of 256-bit beats, addressed by byte
// address (bits 27:5 give the beat; bits above 28 select the port's
// region and are ignored). Reads: up to four bursts are queued; a burst's
// beats are returned one per cycle (while rready) after LAT cycles, with
// rlast on the final beat. Writes: one burst at a time, awready while idle,
// then wready until wlast, then a one-cycle bvalid. The testbench reads and
// writes the contents directly with peek/poke.
module hbm_model #(
  parameter int unsigned PORTS = 2,
  parameter int unsigned AXW   = 33,
  parameter int unsigned LAT   = 20
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [AXW-1:0]   araddr  [PORTS],
  input  logic [7:0]       arlen   [PORTS],
  input  logic             arvalid [PORTS],
  output logic             arready [PORTS],
  output logic [255:0]     rdata   [PORTS],
  output logic             rvalid  [PORTS],
  input  logic             rready  [PORTS],
  output logic             rlast   [PORTS],
  input  logic [AXW-1:0]   awaddr  [PORTS],
  input  logic [7:0]       awlen   [PORTS],
  input  logic             awvalid [PORTS],
  output logic             awready [PORTS],
  input  logic [255:0]     wdata   [PORTS],
  input  logic             wvalid  [PORTS],
  output logic             wready  [PORTS],
  input  logic             wlast   [PORTS],
  output logic             bvalid  [PORTS],
  input  logic             bready  [PORTS]
);
  logic [255:0] mem [longint];
  longint       rq_beat [PORTS][$];
  int           rq_len  [PORTS][$];
  longint       rq_time [PORTS][$];
  longint       now;
  int           rcnt [PORTS];
  longint       wbeat [PORTS];
  logic         wact  [PORTS];

  function automatic longint key(int p, longint beat);
    return (longint'(p) << 32) | beat;
  endfunction
  function automatic logic [255:0] peek(int p, longint beat);
    if (mem.exists(key(p, beat))) return mem[key(p, beat)];
    return '0;
  endfunction
  function automatic void poke(int p, longint beat, logic [255:0] d);
    mem[key(p, beat)] = d;
  endfunction

  always_comb begin
    for (int p = 0; p < PORTS; p++) begin
      arready[p] = rq_beat[p].size() < 4;
      rvalid[p]  = rq_beat[p].size() > 0 && now >= rq_time[p][0];
      rdata[p]   = rvalid[p] ? peek(p, rq_beat[p][0] + rcnt[p]) : '0;
      rlast[p]   = rvalid[p] && (rcnt[p] == rq_len[p][0]);
      awready[p] = !wact[p];
      wready[p]  = wact[p];
    end
  end

  always @(posedge clk) begin
    now <= now + 1;
    if (!rst_n) begin
      now <= 0;
      for (int p = 0; p < PORTS; p++) begin
        rq_beat[p].delete(); rq_len[p].delete(); rq_time[p].delete();
        rcnt[p] <= 0; wact[p] <= 1'b0; bvalid[p] <= 1'b0; wbeat[p] <= 0;
      end
    end else begin
      for (int p = 0; p < PORTS; p++) begin
        if (rvalid[p] && rready[p]) begin
          if (rlast[p]) begin
            void'(rq_beat[p].pop_front()); void'(rq_len[p].pop_front()); void'(rq_time[p].pop_front());
            rcnt[p] <= 0;
          end else rcnt[p] <= rcnt[p] + 1;
        end
        if (arvalid[p] && arready[p]) begin
          rq_beat[p].push_back(longint'(araddr[p][27:5]));
          rq_len[p].push_back(int'(arlen[p]));
          rq_time[p].push_back(now + LAT);
        end
        bvalid[p] <= 1'b0;
        if (awvalid[p] && awready[p]) begin
          wact[p] <= 1'b1; wbeat[p] <= longint'(awaddr[p][27:5]);
        end
        if (wvalid[p] && wready[p]) begin
          poke(p, wbeat[p], wdata[p]);
          wbeat[p] <= wbeat[p] + 1;
          if (wlast[p]) begin wact[p] <= 1'b0; bvalid[p] <= 1'b1; end
        end
      end
    end
  end
endmodule
