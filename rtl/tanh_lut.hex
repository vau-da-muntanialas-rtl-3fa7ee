00
01
02
03
04
05
06
07
08
09
0a
0b
0b
0c
0d
0e
0f
10
10
11
12
12
13
14
14
15
15
16
17
17
17
18
18
19
19
1a
1a
1a
1b
1b
1b
1b
1c
1c
1c
1c
1d
1d
1d
1d
1d
1d
1e
1e
1e
1e
1e
1e
1e
1e
1f
1f
1f
1f
1f
1f
1f
1f
1f
1f
1f
1f
1f
1f
1f
1f
1f
1f
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
20
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e0
e1
e1
e1
e1
e1
e1
e1
e1
e1
e1
e1
e1
e1
e1
e1
e1
e1
e1
e2
e2
e2
e2
e2
e2
e2
e2
e3
e3
e3
e3
e3
e3
e4
e4
e4
e4
e5
e5
e5
e5
e6
e6
e6
e7
e7
e8
e8
e9
e9
e9
ea
eb
eb
ec
ec
ed
ee
ee
ef
f0
f0
f1
f2
f3
f4
f5
f5
f6
f7
f8
f9
fa
fb
fc
fd
fe
ff
