// ctl_if: register-write bus used by both control interfaces of a readout module (lo_ctl and
// dan_ctl). The master holds valid, addr and data until the slave raises ready; a write takes
// place on the clock edge where valid and ready are both high. The bus is write-only. The
// handshake is this design's choice; the paper only names the two 125 MHz control interfaces.
interface ctl_if #(parameter int ADDR_W = 8, parameter int DATA_W = 32);
  logic              valid;
  logic              ready;
  logic [ADDR_W-1:0] addr;
  logic [DATA_W-1:0] data;

  modport master (output valid, addr, data, input ready);
  modport slave  (input valid, addr, data, output ready);
endinterface
