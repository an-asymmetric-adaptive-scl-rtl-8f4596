0565fe84
03e9fea4
028dfeb5
0142febe
0934fee0
0814ff05
0719ff1d
0636ff2f
0c46ff12
0b58ff33
0a8bff4c
09d7ff5d
0ee7ff31
0e18ff50
0d68ff67
0ccfff77
113bff47
1082ff64
0fe6ff79
0f5fff88
1357ff58
12afff72
1221ff86
11a7ff94
1548ff64
14acff7e
142aff90
13baff9d
1716ff6e
1684ff87
160bff98
15a3ffa5
18c7ff77
183eff8f
17cdff9e
176bffab
1a61ff7e
19dfff95
1974ffa4
1918ffaf
1be6ff84
1b6aff9a
1b04ffa9
1aadffb4
1d59ff8a
1ce3ff9f
1c82ffac
1c2effb8
1ebcff8f
1e4bffa3
1deeffb0
1d9effbb
2012ff93
1fa5ffa7
1f4cffb3
1effffbd
215bff98
20f3ffa9
209cffb6
2052ffc0
32b4f119
23cdfecc
2299ff48
21e1ff7a
