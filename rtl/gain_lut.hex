ffff
b504
93cd
8000
727c
6883
60c2
5a82
5555
50f4
4d30
49e6
4700
446b
4219
4000
3e17
3c57
3abb
393e
37dd
3694
3561
3441
3333
3234
3144
3061
2f8a
2ebd
2dfa
2d41
2c90
2be7
2b45
2aab
2a16
2987
28fe
287a
27fb
2780
270a
2698
2629
25bf
2557
24f3
2492
2434
23d9
2380
232a
22d6
2285
2235
21e8
219d
2154
210d
20c7
2083
2041
2000
1fc1
1f83
1f46
1f0b
1ed1
1e99
1e62
1e2b
1df6
1dc2
1d8f
1d5d
1d2c
1cfc
1ccd
1c9f
1c72
1c45
1c19
1bee
1bc4
1b9b
1b72
1b4a
1b23
1afc
1ad6
1ab0
1a8c
1a67
1a44
1a21
19fe
19dc
19bb
199a
1979
1959
1939
191a
18fc
18dd
18c0
18a2
1885
1869
184c
1830
1815
17fa
17df
17c5
17ab
1791
1778
175e
1746
172d
1715
16fd
16e6
16ce
16b7
16a1
168a
1674
165e
1648
1633
161d
1608
15f4
15df
15cb
15b7
15a3
158f
157c
1568
1555
1542
1530
151d
150b
14f9
14e7
14d5
14c4
14b2
14a1
1490
147f
146e
145e
144d
143d
142d
141d
140d
13fd
13ee
13df
13cf
13c0
13b1
13a2
1394
1385
1377
1368
135a
134c
133e
1330
1322
1315
1307
12fa
12ec
12df
12d2
12c5
12b8
12ac
129f
1292
1286
127a
126d
1261
1255
1249
123d
1231
1226
121a
120e
1203
11f8
11ec
11e1
11d6
11cb
11c0
11b5
11aa
11a0
1195
118a
1180
1175
116b
1161
1157
114c
1142
1138
112e
1125
111b
1111
1107
10fe
10f4
10eb
10e1
10d8
10cf
10c5
10bc
10b3
10aa
10a1
1098
108f
1086
107d
1075
106c
1063
105b
1052
104a
1041
1039
1031
1029
1020
1018
1010
1008
1000
