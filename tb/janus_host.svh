// janus_host.svh: host-side helpers for testbenches of the whole JANUS core.
// Included inside a testbench module that declares clk, in_dv, in_data,
// tx_valid, tx_ready, tx_data, tx_dev, tx_sp and the queue array sp_rx[N_SP].
// They build worms (header with device mask, length, payload) and the SP
// command words of janus_pkg::sp_op_e, and wait for tagged replies.

typedef logic [15:0] word_q_t [$];

// one 16-bit word into the IOP per clock
task automatic put(logic [15:0] w);
  @(negedge clk); in_dv = 1; in_data = w;
endtask

// a worm to the devices in mask; long payloads are split into several worms
task automatic worm(logic [7:0] mask, word_q_t w);
  put({8'h00, mask}); put(16'(w.size()));
  foreach (w[i]) put(w[i]);
  @(negedge clk); in_dv = 0;
endtask

// SP interface worm: the SP mask goes first, then the command words
task automatic sp_send(logic [15:0] spmask, word_q_t cmds);
  int i = 0;
  while (i < cmds.size()) begin
    automatic word_q_t w = {spmask};
    // split on command boundaries is not needed: the SP decoder keeps its
    // state across worms, so any split point is fine
    while (i < cmds.size() && w.size() < 60000) begin w.push_back(cmds[i]); i++; end
    worm(8'h10, w);
  end
endtask

function automatic void c_wr16(ref word_q_t q, input int t, int z, int c, logic [15:0] d);
  q.push_back({SP_WR16, 9'd0, 3'(t)}); q.push_back(16'(z)); q.push_back(16'(c)); q.push_back(d);
endfunction
function automatic void c_rd16(ref word_q_t q, input int t, int z, int c);
  q.push_back({SP_RD16, 9'd0, 3'(t)}); q.push_back(16'(z)); q.push_back(16'(c));
endfunction
function automatic void c_lut(ref word_q_t q, input int i, logic [31:0] v);
  q.push_back({SP_WR_LUT, 8'd0, 4'(i)}); q.push_back(v[31:16]); q.push_back(v[15:0]);
endfunction
function automatic void c_seed(ref word_q_t q, input logic [31:0] v);
  q.push_back({SP_SEED, 12'd0}); q.push_back(v[31:16]); q.push_back(v[15:0]);
endfunction
function automatic void c_run(ref word_q_t q, input int n, alg_e a);
  q.push_back({SP_RUN, 11'd0, 1'(a)}); q.push_back(16'(n));
endfunction
function automatic void c_nn_send(ref word_q_t q, input int d, logic [31:0] v);
  q.push_back({SP_NN_SEND, 10'd0, 2'(d)}); q.push_back(v[31:16]); q.push_back(v[15:0]);
endfunction
function automatic void c_nn_read(ref word_q_t q, input int d);
  q.push_back({SP_NN_READ, 10'd0, 2'(d)});
endfunction

// wait until SP s has returned n words, then pop them
task automatic get_words(int s, int n, output logic [15:0] w [$]);
  int guard = 0;
  while (sp_rx[s].size() < n && guard < 20000) begin @(negedge clk); guard++; end
  w = {};
  for (int i = 0; i < n; i++) w.push_back(sp_rx[s].size() > 0 ? sp_rx[s].pop_front() : 16'hDEAD);
endtask

// poll one SP until its engine is idle; returns sweeps done and busy cycles
task automatic wait_idle(int s, output int sweeps, output int cyc);
  logic [15:0] w [$];
  do begin
    automatic word_q_t q = {{SP_STATUS, 12'd0}};
    repeat (4) @(negedge clk);
    sp_send(16'(1 << s), q);
    get_words(s, 2, w);
  end while (w[0][15]);
  sweeps = w[0][14:0];
  cyc    = w[1];
endtask
