10
10
10
11
11
11
11
12
12
12
12
13
13
13
13
14
14
14
14
15
15
15
15
16
16
16
16
16
17
17
17
17
17
18
18
18
18
18
19
19
19
19
19
19
1a
1a
1a
1a
1a
1a
1a
1b
1b
1b
1b
1b
1b
1b
1c
1c
1c
1c
1c
1c
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
1e
1e
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
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
02
02
02
02
02
02
02
02
02
02
02
02
02
02
02
02
02
02
03
03
03
03
03
03
03
03
03
03
03
04
04
04
04
04
04
04
04
04
04
05
05
05
05
05
05
05
06
06
06
06
06
06
06
07
07
07
07
07
07
08
08
08
08
08
09
09
09
09
09
0a
0a
0a
0a
0a
0b
0b
0b
0b
0c
0c
0c
0c
0d
0d
0d
0d
0e
0e
0e
0e
0f
0f
0f
0f
10
10
