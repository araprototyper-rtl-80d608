// partial_crossbar: interconnect layer 1, accelerator ports <-> shared buffers.
//
// Each accelerator port p may be wired to a fixed subset of the buffers,
// given by the topology mask CONN (bit p*NUM_BUF+b). Only those cross points
// exist in hardware. At run time the buffer allocator selects, for each port,
// one buffer out of its subset by writing a selection register (cfg_* port).
// Once selected, the port owns the buffer as a local memory with a dedicated
// path, so a pipelined accelerator gets one element per cycle with no
// arbitration (the paper's II = 1 property).
//
// A configuration write is rejected (cfg_reject pulses, register unchanged)
// when the buffer is not in the port's subset or is already selected by
// another enabled port; writing cfg_en = 0 releases the port. Selections
// reset to "none". Accesses are combinational through the crossbar; read data
// comes back one cycle later from the buffer, routed by the port's current
// selection, so selections must not change while a port is busy.
// The topology itself follows the paper's optimizer idea (see ara_pkg); the
// selection registers and the reject rule are this design's choices.
module partial_crossbar
  import ara_pkg::*;
#(
  parameter int unsigned NUM_PORTS = TOTAL_PORTS,
  parameter int unsigned NUM_BUF   = ara_pkg::NUM_BUF,
  parameter logic [NUM_PORTS*NUM_BUF-1:0] CONN = DEFAULT_CONN,
  localparam int unsigned PSW = (NUM_PORTS > 1) ? $clog2(NUM_PORTS) : 1,
  localparam int unsigned BSW = (NUM_BUF > 1) ? $clog2(NUM_BUF) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // accelerator ports
  input  port_req_t     port_req   [NUM_PORTS],
  output logic [DW-1:0] port_rdata [NUM_PORTS],
  // buffer port A
  output port_req_t     buf_req    [NUM_BUF],
  input  logic [DW-1:0] buf_rdata  [NUM_BUF],
  // run-time selection (from the control registers)
  input  logic          cfg_we,
  input  logic [PSW-1:0] cfg_port,
  input  logic [BSW-1:0] cfg_buf,
  input  logic          cfg_en,
  output logic          cfg_reject,
  output logic [BSW-1:0] sel     [NUM_PORTS],
  output logic          sel_en  [NUM_PORTS]
);
  // ---- selection registers -------------------------------------------------
  logic allowed, taken;
  always_comb begin
    allowed = 1'b0;
    taken   = 1'b0;
    for (int unsigned p = 0; p < NUM_PORTS; p++)
      for (int unsigned b = 0; b < NUM_BUF; b++)
        if (CONN[p*NUM_BUF + b] && PSW'(p) == cfg_port && BSW'(b) == cfg_buf) allowed = 1'b1;
    for (int unsigned p = 0; p < NUM_PORTS; p++)
      if (sel_en[p] && sel[p] == cfg_buf && PSW'(p) != cfg_port) taken = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned p = 0; p < NUM_PORTS; p++) begin
        sel[p]    <= '0;
        sel_en[p] <= 1'b0;
      end
      cfg_reject <= 1'b0;
    end else begin
      cfg_reject <= 1'b0;
      if (cfg_we && int'(cfg_port) < int'(NUM_PORTS)) begin
        if (!cfg_en) begin
          sel_en[cfg_port] <= 1'b0;
        end else if (allowed && !taken) begin
          sel[cfg_port]    <= cfg_buf;
          sel_en[cfg_port] <= 1'b1;
        end else begin
          cfg_reject <= 1'b1;
        end
      end else if (cfg_we) begin
        cfg_reject <= 1'b1;
      end
    end
  end

  // ---- cross points: only where CONN has a 1 -------------------------------
  always_comb begin
    for (int unsigned b = 0; b < NUM_BUF; b++) begin
      buf_req[b] = '0;
      for (int unsigned p = 0; p < NUM_PORTS; p++)
        if (CONN[p*NUM_BUF + b] && sel_en[p] && sel[p] == BSW'(b))
          buf_req[b] = port_req[p];
    end
    for (int unsigned p = 0; p < NUM_PORTS; p++) begin
      port_rdata[p] = '0;
      for (int unsigned b = 0; b < NUM_BUF; b++)
        if (CONN[p*NUM_BUF + b] && sel[p] == BSW'(b))
          port_rdata[p] = buf_rdata[b];
    end
  end


  // a buffer is never owned by two ports
  always_ff @(posedge clk) if (rst_n) begin
    for (int unsigned p = 0; p < NUM_PORTS; p++)
      for (int unsigned q = p + 1; q < NUM_PORTS; q++)
        assert (!(sel_en[p] && sel_en[q] && sel[p] == sel[q]))
          else $error("buffer %0d owned by ports %0d and %0d", sel[p], p, q);
  end

endmodule
